// tb_local_comm: random flits in both directions (core to link, link to core)
// with random valid gaps and random back-pressure; every flit must come out
// once, in order, and the counters must match. A gap-free run with no
// back-pressure must pass one flit per cycle.
module tb_local_comm;
  import tasa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  logic core_tx_valid, core_tx_ready, core_rx_valid, core_rx_ready;
  logic link_tx_valid, link_tx_ready, link_rx_valid, link_rx_ready;
  flit_t core_tx_flit, core_rx_flit, link_tx_flit, link_rx_flit;
  logic [31:0] tx_count, rx_count;

  local_comm #(.DEPTH(4)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic flit_t mk(int n);
    flit_t f;
    f = '0;
    f.hdr.tag = 16'(n);
    for (int k = 0; k < LINE_W / 32; k++) f.data[32*k +: 32] = $urandom;
    return f;
  endfunction

  flit_t q_up [$], q_dn [$];
  int n_up = 0, n_dn = 0;
  bit gaps = 1;
  int NF = 300;

  // core side producer and consumer
  always @(posedge clk) if (rst_n) begin
    if (core_tx_valid && core_tx_ready) begin q_up.push_back(core_tx_flit); core_tx_valid <= 0; end
    if (link_rx_valid && link_rx_ready) begin q_dn.push_back(link_rx_flit); link_rx_valid <= 0; end
    if (link_tx_valid && link_tx_ready) begin
      checks++; n_up++;
      if (q_up.size() == 0 || q_up.pop_front() !== link_tx_flit) begin failures++; if (failures < 10) $display("link_tx flit %0d wrong", n_up); end
    end
    if (core_rx_valid && core_rx_ready) begin
      checks++; n_dn++;
      if (q_dn.size() == 0 || q_dn.pop_front() !== core_rx_flit) begin failures++; if (failures < 10) $display("core_rx flit %0d wrong", n_dn); end
    end
  end

  int sent_up = 0, sent_dn = 0;
  always @(negedge clk) if (rst_n) begin
    if (!core_tx_valid && sent_up < NF && (!gaps || $urandom % 3 != 0)) begin core_tx_valid = 1; core_tx_flit = mk(sent_up); sent_up++; end
    if (!link_rx_valid && sent_dn < NF && (!gaps || $urandom % 3 != 0)) begin link_rx_valid = 1; link_rx_flit = mk(sent_dn); sent_dn++; end
    link_tx_ready = !gaps || ($urandom % 2 == 0);
    core_rx_ready = !gaps || ($urandom % 2 == 0);
  end

  initial begin
    int t0;
    core_tx_valid = 0; link_rx_valid = 0; link_tx_ready = 0; core_rx_ready = 0;
    core_tx_flit = '0; link_rx_flit = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (n_up == NF && n_dn == NF);
    repeat (5) @(negedge clk);
    checks++;
    if (tx_count != 32'(NF) || rx_count != 32'(NF)) begin failures++; $display("counters %0d %0d", tx_count, rx_count); end
    // full-rate phase
    gaps = 0; NF = 600;
    t0 = $time;
    wait (n_up == NF && n_dn == NF);
    checks++;
    if (($time - t0) / 2 > 300 + 8) begin failures++; $display("300 flits took %0d cycles", ($time - t0) / 2); end
    checks++;
    if (q_up.size() != 0 || q_dn.size() != 0) begin failures++; $display("flits left over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
