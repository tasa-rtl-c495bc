// tb_scratchpad: random writes and dual-port reads against a reference array;
// checks the one-cycle read latency, that a read and a write of the same line
// in one cycle return the old value, and that rdata holds while re is low.
module tb_scratchpad;
  import tasa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;

  localparam int LINES = SPM_LINES;
  localparam int AW = $clog2(LINES);
  logic re0, re1, we;
  logic [AW-1:0] raddr0, raddr1, waddr;
  line_t rdata0, rdata1, wdata;

  scratchpad #(.LINES(LINES)) dut (.*);

  line_t model [LINES];
  bit    valid_l [LINES];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rnd();
    line_t l;
    for (int k = 0; k < LINE_W / 32; k++) l[32*k +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    line_t e0, e1, h0;
    bit c0, c1;
    re0 = 0; re1 = 0; we = 0; raddr0 = '0; raddr1 = '0; waddr = '0; wdata = '0;
    foreach (valid_l[i]) valid_l[i] = 0;
    // fill every line
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = rnd(); model[i] = wdata; valid_l[i] = 1;
    end
    @(negedge clk);
    we = 0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      c0 = $urandom % 4 != 0; c1 = $urandom % 4 != 0;
      re0 = c0; re1 = c1;
      raddr0 = AW'($urandom); raddr1 = AW'($urandom);
      we = $urandom % 2;
      waddr = (it % 5 == 0) ? raddr0 : AW'($urandom);
      wdata = rnd();
      e0 = model[raddr0]; e1 = model[raddr1];
      h0 = rdata0;
      if (we) model[waddr] = wdata;
      @(negedge clk);
      re0 = 0; re1 = 0; we = 0;
      if (c0) begin checks++; if (rdata0 !== e0) begin failures++; if (failures < 10) $display("port0 line %0d", raddr0); end end
      else    begin checks++; if (rdata0 !== h0) begin failures++; if (failures < 10) $display("port0 changed without re"); end end
      if (c1) begin checks++; if (rdata1 !== e1) begin failures++; if (failures < 10) $display("port1 line %0d", raddr1); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
