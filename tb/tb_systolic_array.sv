// tb_systolic_array: random small-integer GEMMs on a reduced 8x8 array and on
// the full 32x32 array; checks every result element against an integer
// reference and the fixed drain latency (done ROWS+COLS cycles after the last
// step).
module tb_systolic_array;
  import tasa_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int R = 32, C = 32, KMAX = 40;

  logic start, in_valid, in_last, busy, done;
  bf16_t w_col [R];
  bf16_t x_row [C];
  logic [$clog2(R)-1:0] out_addr;
  fp32_t out_row [C];

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);

  int W [R][KMAX];
  int X [KMAX][C];

  task automatic run_gemm(int K, bit gaps);
    longint ref_c;
    int t_last, t_done;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < K; k++) begin
      if (gaps && ($urandom % 3 == 0)) begin
        in_valid = 0; @(negedge clk);
      end
      for (int i = 0; i < R; i++) w_col[i] = int_to_bf16(W[i][k]);
      for (int j = 0; j < C; j++) x_row[j] = int_to_bf16(X[k][j]);
      in_valid = 1; in_last = (k == K - 1);
      if (in_last) t_last = cyc;
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!done) @(negedge clk);
    t_done = cyc;
    checks++;
    if (t_done - t_last != R + C) begin
      failures++; $display("latency %0d expected %0d", t_done - t_last, R + C);
    end
    for (int i = 0; i < R; i++) begin
      out_addr = i[$clog2(R)-1:0];
      @(negedge clk);
      for (int j = 0; j < C; j++) begin
        ref_c = 0;
        for (int k = 0; k < K; k++) ref_c += W[i][k] * X[k][j];
        checks++;
        if (out_row[j] !== int_to_fp32(ref_c)) begin
          failures++;
          if (failures < 10) $display("C[%0d][%0d]=%h expected %h", i, j, out_row[j], int_to_fp32(ref_c));
        end
      end
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; in_valid = 0; in_last = 0; out_addr = '0;
    foreach (w_col[i]) w_col[i] = '0;
    foreach (x_row[j]) x_row[j] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      int K;
      K = (trial == 0) ? 1 : (trial == 1 ? 32 : KMAX);
      for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) W[i][k] = int'($urandom % 15) - 7;
      for (int k = 0; k < K; k++) for (int j = 0; j < C; j++) X[k][j] = int'($urandom % 15) - 7;
      run_gemm(K, trial == 2);
    end
    checks++;
    if (busy) begin failures++; $display("busy stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
