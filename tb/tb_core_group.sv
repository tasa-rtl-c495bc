// tb_core_group: one full-size core group (E-core + 3 P-cores, each with 16
// DRAM channel models) at mesh position (1,1) runs a decode-step-like
// program:
//   P-cores: LOAD GEMM operands, then SEND their block of key lines straight
//   from DRAM to the E-core (bandwidth sharing) while their systolic arrays run
//   a GEMM (ReLU on P-cores 1 and 3); then SEND the result rows over the mesh
//   (P1 north, P2 south, P3 west).
//   E-core: LOAD the query, GEMV over its own keys read straight from DRAM,
//   then one GEMV per P-core over the key lines arriving on the NoC, then SEND
//   the four score lines east.
// Every flit leaving on a mesh port is checked against integer references.
// Mechanisms are counted and each must have happened: DRAM-to-NoC sharing,
// NoC-sourced GEMV, DRAM-sourced GEMV, GEMM overlapping a DRAM stream, mesh
// traffic on all four ports, flow-control stalls on the mesh.
module tb_core_group;
  import tasa_pkg::*;
  import tb_fp_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int NP = 3, NC = NP + 1, NT = 12, R = 32, C = 32, K = 6, S = 3, L = S * NT / 2;
  logic [GX_W-1:0] my_x = 1;
  logic [GY_W-1:0] my_y = 1;
  logic [7:0] temp_c [NC];
  logic instr_valid [NC], instr_ready [NC], idle [NC];
  instr_t instr [NC];
  logic [31:0] retired [NC], ref_count [NC];
  dram_req_t dram_o [NC][DRAM_CH];
  dram_rsp_t dram_i [NC][DRAM_CH];
  logic m_out_valid [4], m_out_ready [4], m_in_valid [4], m_in_ready [4];
  flit_t m_out_flit [4], m_in_flit [4];
  logic [31:0] shared_lines, gemv_comm_lines, gemv_steps, gemm_count;

  core_group dut (.*);

  // DRAM models with a preload back door
  line_t pre [longint];     // key: core * 2^32 + core line address
  event  do_poke;
  int viol [NC][DRAM_CH];
  for (genvar c = 0; c < NC; c++) begin : g_c
    for (genvar ch = 0; ch < DRAM_CH; ch++) begin : g_m
      int n_act, n_pre, n_rd, n_wr, n_ref;
      dram_channel_model u_m (.clk, .req(dram_o[c][ch]), .rsp(dram_i[c][ch]), .violations(viol[c][ch]),
        .n_act, .n_pre, .n_rd, .n_wr, .n_ref);
      always @(do_poke)
        foreach (pre[key])
          if (key >> 32 == c && key % DRAM_CH == ch) u_m.poke((key & 32'hFFFF_FFFF) >> 4, pre[key]);
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- per-core instruction feeders
  instr_t prog [NC][$];
  int n_issued [NC];
  always @(negedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) begin
      if (!(instr_valid[c] && !instr_ready[c]) && prog[c].size() > 0) begin
        instr[c] = prog[c].pop_front(); instr_valid[c] = 1; n_issued[c]++;
      end else if (!(instr_valid[c] && !instr_ready[c])) instr_valid[c] = 0;
    end
  always @(posedge clk) for (int c = 0; c < NC; c++) if (instr_valid[c] && instr_ready[c]) instr_valid[c] <= 0;

  // ---- mesh ports
  line_t exp_m [4][$];
  int n_mesh [4];
  int mesh_stall = 0;
  always @(negedge clk) if (rst_n) for (int d = 0; d < 4; d++) m_out_ready[d] = ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) for (int d = 0; d < 4; d++) begin
    if (m_out_valid[d] && !m_out_ready[d]) mesh_stall++;
    if (m_out_valid[d] && m_out_ready[d]) begin
      checks++; n_mesh[d]++;
      if (exp_m[d].size() == 0 || m_out_flit[d].data !== exp_m[d].pop_front()) begin
        failures++; if (failures < 10) $display("t=%0t wrong flit on mesh port %0d", $time, d);
      end
    end
  end

  // ---- GEMM overlapping a DRAM stream
  int overlap = 0;
  logic [31:0] sh_q = 0;
  always @(posedge clk) begin
    if (shared_lines != sh_q &&
        (dut.g_p[0].u_p.gs != 0 || dut.g_p[1].u_p.gs != 0 || dut.g_p[2].u_p.gs != 0)) overlap++;
    sh_q <= shared_lines;
  end

  int X [S][32];
  int KEY [NC][S][NT][32];
  int W [NP][2][R][K], XG [NP][2][K][C];
  longint G [NP][2][R][C];

  function automatic line_t key_line(int c, int s, int p);
    int v [64];
    for (int i = 0; i < 32; i++) begin v[i] = KEY[c][s][2*p][i]; v[32 + i] = KEY[c][s][2*p+1][i]; end
    return bf_line(v);
  endfunction

  function automatic line_t score_line(int c);
    longint v [32];
    foreach (v[i]) v[i] = 0;
    for (int t = 0; t < NT; t++)
      for (int s = 0; s < S; s++) for (int i = 0; i < 32; i++) v[t] += X[s][i] * KEY[c][s][t][i];
    return fp_line(v);
  endfunction

  function automatic line_t gemm_op(int p, int a, int k);
    int v [64];
    foreach (v[i]) v[i] = 0;
    for (int r = 0; r < R; r++) v[r] = W[p][a][r][k];
    for (int c = 0; c < C; c++) v[32 + c] = XG[p][a][k][c];
    return bf_line(v);
  endfunction

  function automatic line_t gemm_row(int p, int a, int r, bit relu);
    longint v [32];
    foreach (v[i]) v[i] = 0;
    for (int c = 0; c < C; c++) v[c] = (relu && G[p][a][r][c] < 0) ? 0 : G[p][a][r][c];
    return fp_line(v);
  endfunction

  initial begin
    int dirs [NP] = '{0, 2, 3};            // P1 north, P2 south, P3 west
    int dx [NP] = '{1, 1, 0}, dy [NP] = '{0, 2, 1};
    foreach (instr_valid[c]) begin instr_valid[c] = 0; instr[c] = '0; temp_c[c] = 8'd80; n_issued[c] = 0; end
    foreach (m_in_valid[d]) begin m_in_valid[d] = 0; m_in_flit[d] = '0; m_out_ready[d] = 1; n_mesh[d] = 0; end
    foreach (X[s, i]) X[s][i] = int'($urandom % 9) - 4;
    foreach (KEY[c, s, t, i]) KEY[c][s][t][i] = int'($urandom % 9) - 4;
    foreach (W[p, a, r, k]) W[p][a][r][k] = int'($urandom % 9) - 4;
    foreach (XG[p, a, k, c]) XG[p][a][k][c] = int'($urandom % 9) - 4;
    foreach (G[p, a, r, c]) begin
      G[p][a][r][c] = 0;
      for (int k = 0; k < K; k++) G[p][a][r][c] += W[p][a][r][k] * XG[p][a][k][c];
    end
    // DRAM contents: query at E 0.., keys at 'h100.. of every core, GEMM operands at P 'h400..
    for (int s = 0; s < S; s++) begin
      int v [64];
      foreach (v[i]) v[i] = (i < 32) ? X[s][i] : 0;
      pre[longint'(s)] = bf_line(v);
    end
    for (int c = 0; c < NC; c++) for (int s = 0; s < S; s++) for (int p = 0; p < NT / 2; p++)
      pre[(longint'(c) << 32) + 'h100 + s * NT / 2 + p] = key_line(c, s, p);
    for (int p = 0; p < NP; p++) for (int a = 0; a < 2; a++) for (int k = 0; k < K; k++)
      pre[(longint'(p + 1) << 32) + 'h400 + a * K + k] = gemm_op(p, a, k);
    ->do_poke;
    repeat (3) @(negedge clk); rst_n = 1;

    // expected mesh traffic
    for (int p = 0; p < NP; p++)
      for (int a = 0; a < 2; a++) for (int r = 0; r < R; r++) exp_m[dirs[p]].push_back(gemm_row(p, a, r, p != 1));
    for (int c = 0; c < NC; c++) exp_m[1].push_back(score_line(c));

    // E-core program
    prog[0].push_back(mk(OP_LOAD, 0, 0, 0, 0, 0, S, 0));
    prog[0].push_back(mk(OP_GEMV, int'(WSRC_DRAM), 1, 0, 0, 100, S, 'h100));
    for (int p = 0; p < NP; p++) prog[0].push_back(mk(OP_GEMV, int'(WSRC_COMM), 1, 0, 0, 101 + p, S));
    prog[0].push_back(mk(OP_SEND, 0, 1, 100, 0, 0, NC, 0, 2, 1, 0));
    // P-core programs; the host staggers the DRAM streams so the E-core sees
    // one P-core's key block after another
    for (int p = 0; p < NP; p++) begin
      wait (int'(shared_lines) >= p * L);
      prog[p + 1].push_back(mk(OP_LOAD, 0, 0, 0, 0, 0, 2 * K, 'h400));
      prog[p + 1].push_back(mk(OP_SEND, 1, 0, 0, 0, 0, L, 'h100, 1, 1, 0));
      prog[p + 1].push_back(mk(OP_GEMM, (p != 1) ? 8 : 0, 0, 0, K, 100, K));
      prog[p + 1].push_back(mk(OP_SEND, 0, 1, 100, 0, 0, 2 * R, 0, dx[p], dy[p], 0));
    end
    wait (n_mesh[0] + n_mesh[1] + n_mesh[2] + n_mesh[3] == 3 * 2 * R + NC);
    repeat (20) @(negedge clk);

    for (int d = 0; d < 4; d++) begin
      checks++;
      if (exp_m[d].size() != 0) begin failures++; $display("mesh port %0d: %0d flits missing", d, exp_m[d].size()); end
    end
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (int'(retired[c]) != n_issued[c] || !idle[c]) begin failures++; $display("core %0d retired %0d of %0d", c, retired[c], n_issued[c]); end
      for (int ch = 0; ch < DRAM_CH; ch++) begin
        checks++;
        if (viol[c][ch] != 0) begin failures++; $display("core %0d channel %0d violations", c, ch); end
      end
    end
    $display("mechanisms: shared %0d lines, GEMV NoC lines %0d, GEMV steps %0d, GEMMs %0d, overlap %0d cycles, mesh stalls %0d",
             shared_lines, gemv_comm_lines, gemv_steps, gemm_count, overlap, mesh_stall);
    checks++;
    if (shared_lines != NP * L) begin failures++; $display("shared_lines wrong"); end
    checks++;
    if (gemv_comm_lines != NP * L) begin failures++; $display("gemv_comm_lines wrong"); end
    checks++;
    if (gemv_steps != NC * S) begin failures++; $display("gemv_steps wrong"); end
    checks++;
    if (gemm_count != NP) begin failures++; $display("gemm_count wrong"); end
    checks++;
    if (overlap == 0) begin failures++; $display("GEMM never overlapped a DRAM stream"); end
    checks++;
    if (mesh_stall == 0) begin failures++; $display("no mesh stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
