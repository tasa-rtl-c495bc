// tb_pcore: one P-core at full size (two 32x32 systolic arrays, 1024-line
// scratchpad) with 16 DRAM channel models, driven by a small program:
//   RECV operands from the link, GEMM with ReLU post-processing, SEND the
//   result rows back, STORE them to DRAM and LOAD them again, VEC ADD of the
//   two arrays' results, SEND from DRAM (bandwidth sharing) overlapped with a
//   second GEMM, and a last GEMM without ReLU.
// Every line leaving the link is checked against integer references. Also
// checked: the DRAM line rate of SEND-from-DRAM, that GEMM and the DRAM
// stream really overlapped, the GEMM cycle count, retired/gemm/sent counters,
// no DRAM timing violations, and refresh activity.
module tb_pcore;
  import tasa_pkg::*;
  import tb_fp_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int R = 32, C = 32, K = 8;
  logic [7:0] temp_c;
  logic instr_valid, instr_ready, idle;
  instr_t instr;
  logic [31:0] retired, ref_count, sent_from_dram, gemm_count;
  dram_req_t dram_o [DRAM_CH];
  dram_rsp_t dram_i [DRAM_CH];
  logic link_tx_valid, link_tx_ready, link_rx_valid, link_rx_ready;
  flit_t link_tx_flit, link_rx_flit;

  pcore dut (.*);

  int viol [DRAM_CH];
  int n_act [DRAM_CH], n_pre [DRAM_CH], n_rd [DRAM_CH], n_wr [DRAM_CH], n_ref [DRAM_CH];
  for (genvar c = 0; c < DRAM_CH; c++) begin : g_m
    dram_channel_model u_m (.clk, .req(dram_o[c]), .rsp(dram_i[c]), .violations(viol[c]),
      .n_act(n_act[c]), .n_pre(n_pre[c]), .n_rd(n_rd[c]), .n_wr(n_wr[c]), .n_ref(n_ref[c]));
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- instruction feeder
  instr_t prog [$];
  int n_issued = 0;
  always @(negedge clk) if (rst_n) begin
    if (!(instr_valid && !instr_ready) && prog.size() > 0) begin
      instr = prog.pop_front(); instr_valid = 1; n_issued++;
    end else if (!(instr_valid && !instr_ready)) instr_valid = 0;
  end
  // a flit accepted on the edge before the negedge: drop valid if nothing new
  always @(posedge clk) if (instr_valid && instr_ready) instr_valid <= 0;

  // ---- link: flits to the core, and expected flits from the core
  flit_t to_core [$];
  line_t exp_lines [$];
  int n_rx = 0;
  always @(negedge clk) if (rst_n) begin
    if (!link_rx_valid && to_core.size() > 0) begin link_rx_flit = to_core.pop_front(); link_rx_valid = 1; end
    link_tx_ready = ($urandom % 8 != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (link_rx_valid && link_rx_ready) link_rx_valid <= 0;
    if (link_tx_valid && link_tx_ready) begin
      checks++;
      if (exp_lines.size() == 0 || link_tx_flit.data !== exp_lines.pop_front()) begin
        failures++;
        if (failures < 10) $display("t=%0t flit %0d from the core wrong", $time, n_rx);
      end
      n_rx++;
    end
  end

  // ---- overlap monitor: GEMM running while DRAM lines are being sent
  int overlap = 0;
  logic [31:0] sfd_q = 0;
  always @(posedge clk) begin
    if (dut.gs != dut.G_IDLE && sent_from_dram != sfd_q) overlap++;
    sfd_q <= sent_from_dram;
  end

  int W0 [R][K], X0 [K][C], W1 [R][K], X1 [K][C];
  longint C0 [R][C], C1 [R][C];

  function automatic flit_t op_flit(int w [R][K], int x [K][C], int k);
    int v [64];
    flit_t f;
    foreach (v[i]) v[i] = 0;
    for (int r = 0; r < R; r++) v[r] = w[r][k];
    for (int c = 0; c < C; c++) v[32 + c] = x[k][c];
    f = '0;
    f.data = bf_line(v);
    return f;
  endfunction

  function automatic line_t row_line(longint m [R][C], int r, bit relu);
    longint v [32];
    foreach (v[i]) v[i] = 0;
    for (int c = 0; c < C; c++) v[c] = (relu && m[r][c] < 0) ? 0 : m[r][c];
    return fp_line(v);
  endfunction

  task automatic wait_idle();
    @(negedge clk);
    while (prog.size() > 0 || instr_valid || !idle) @(negedge clk);
  endtask

  initial begin
    int t0, g0;
    temp_c = 8'd110;   // hot: refresh every 488 cycles
    instr_valid = 0; instr = '0; link_rx_valid = 0; link_rx_flit = '0; link_tx_ready = 1;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) begin
      W0[r][k] = int'($urandom % 9) - 4; W1[r][k] = int'($urandom % 9) - 4;
    end
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) begin
      X0[k][c] = int'($urandom % 9) - 4; X1[k][c] = int'($urandom % 9) - 4;
    end
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      C0[r][c] = 0; C1[r][c] = 0;
      for (int k = 0; k < K; k++) begin C0[r][c] += W0[r][k] * X0[k][c]; C1[r][c] += W1[r][k] * X1[k][c]; end
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. receive operands: lines 0..K-1 for array 0, 8..8+K-1 for array 1
    for (int k = 0; k < K; k++) to_core.push_back(op_flit(W0, X0, k));
    for (int k = 0; k < K; k++) to_core.push_back(op_flit(W1, X1, k));
    prog.push_back(mk(OP_RECV, 0, 0, 0, 0, 0, 2 * K));
    // 2. GEMM with ReLU -> lines 100.. (array 0) and 132.. (array 1)
    prog.push_back(mk(OP_GEMM, 8, 1, 0, 8, 100, K));
    wait_idle();
    checks++;
    if (gemm_count != 1) begin failures++; $display("gemm_count %0d", gemm_count); end
    // 3. send both result blocks back
    for (int r = 0; r < R; r++) exp_lines.push_back(row_line(C0, r, 1));
    for (int r = 0; r < R; r++) exp_lines.push_back(row_line(C1, r, 1));
    prog.push_back(mk(OP_SEND, 0, 1, 100, 0, 0, 2 * R, 0, 1, 1, 0));
    // 4. store block 0 to DRAM, load it to 300, add block 1, send the sum
    prog.push_back(mk(OP_STORE, 0, 1, 100, 0, 0, R, 'h1000));
    prog.push_back(mk(OP_LOAD,  0, 1, 300, 0, 0, R, 'h1000));
    prog.push_back(mk(OP_VEC, int'(VOP_ADD), 1, 300, 132, 400, R));
    for (int r = 0; r < R; r++) begin
      longint s [32];
      foreach (s[i]) s[i] = 0;
      for (int c = 0; c < C; c++) s[c] = (C0[r][c] < 0 ? 0 : C0[r][c]) + (C1[r][c] < 0 ? 0 : C1[r][c]);
      exp_lines.push_back(fp_line(s));
    end
    prog.push_back(mk(OP_SEND, 0, 1, 400, 0, 0, R, 0, 1, 1, 0));
    wait_idle();
    wait (n_rx == 3 * R);
    // 5. SEND from DRAM (bandwidth sharing) together with a GEMM without ReLU
    for (int i = 0; i < 256; i++) exp_lines.push_back(init_line('h4000 + i));
    t0 = $time; g0 = int'(sent_from_dram);
    prog.push_back(mk(OP_SEND, 1, 1, 0, 0, 0, 256, 'h4000, 1, 1, 0));
    prog.push_back(mk(OP_GEMM, 0, 0, 0, 8, 500, K));
    wait (int'(sent_from_dram) == g0 + 256);
    $display("256 lines sent from DRAM in %0d cycles", ($time - t0) / 2);
    checks++;
    if (($time - t0) / 2 > 400) begin failures++; $display("SEND from DRAM too slow"); end
    wait_idle();
    checks++;
    if (overlap == 0) begin failures++; $display("GEMM never overlapped the DRAM stream"); end
    $display("GEMM overlapped the DRAM stream for %0d cycles", overlap);
    // 6. results of the second GEMM (no ReLU) sent back; GEMM duration check
    for (int r = 0; r < R; r++) exp_lines.push_back(row_line(C0, r, 0));
    prog.push_back(mk(OP_SEND, 0, 1, 500, 0, 0, R, 0, 1, 1, 0));
    wait_idle();
    t0 = $time;
    prog.push_back(mk(OP_GEMM, 0, 1, 0, 8, 600, K));
    wait_idle();
    // K feed cycles, ROWS+COLS to drain the arrays, 2*ROWS result rows
    // through the single write port, small overhead
    $display("GEMM of K=%0d took %0d cycles", K, ($time - t0) / 2);
    checks++;
    if (($time - t0) / 2 > K + R + C + 2 * R + 12) begin failures++; $display("GEMM too slow"); end
    repeat (20) @(negedge clk);
    checks++;
    if (n_rx != 4 * R + 256 || exp_lines.size() != 0) begin failures++; $display("received %0d lines, %0d expected left", n_rx, exp_lines.size()); end
    checks++;
    if (int'(retired) != n_issued || gemm_count != 3 || sent_from_dram != 256) begin
      failures++; $display("retired %0d/%0d gemm %0d sent_from_dram %0d", retired, n_issued, gemm_count, sent_from_dram);
    end
    for (int c = 0; c < DRAM_CH; c++) begin
      checks++;
      if (viol[c] != 0) begin failures++; $display("channel %0d: %0d violations", c, viol[c]); end
    end
    checks++;
    if (ref_count == 0) begin failures++; $display("no refresh"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
