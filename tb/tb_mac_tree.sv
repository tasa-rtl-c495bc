// tb_mac_tree: random dot products accumulated over several steps, with
// clear and clear+step, checked against integer references.
module tb_mac_tree;
  import tasa_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int N = 32;
  logic clear, step;
  bf16_t w [N];
  bf16_t x [N];
  fp32_t acc;

  mac_tree #(.N(N)) dut (.*);

  initial begin
    #5000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_acc;
    clear = 0; step = 0;
    foreach (w[i]) begin w[i] = '0; x[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      int steps;
      steps = 1 + int'($urandom % 6);
      ref_acc = 0;
      for (int s = 0; s < steps; s++) begin
        for (int i = 0; i < N; i++) begin
          int a, b;
          a = int'($urandom % 31) - 15; b = int'($urandom % 31) - 15;
          w[i] = int_to_bf16(a); x[i] = int_to_bf16(b);
          ref_acc += a * b;
        end
        step = 1; clear = (s == 0);
        @(negedge clk);
        step = 0; clear = 0;
        if ($urandom % 2) @(negedge clk);   // idle cycle: acc must hold
        checks++;
        if (acc !== int_to_fp32(ref_acc)) begin
          failures++; $display("trial %0d step %0d acc=%h exp=%h", trial, s, acc, int_to_fp32(ref_acc));
        end
      end
    end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (acc !== 32'd0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
