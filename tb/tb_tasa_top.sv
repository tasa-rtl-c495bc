// tb_tasa_top: end-to-end run of a 2x1 mesh of core groups
// (8 cores; 8x8 systolic arrays to keep the build small, everything else at
// full size) with DRAM channel models.
// Every group runs the decode-step program below; the host side (this
// testbench) only feeds instructions and sets temperatures.
//   P-core 1 of each group: LOAD GEMM operands; SEND its key block straight
//   from DRAM to its own E-core (bandwidth sharing) while its systolic arrays
//   run a GEMM with ReLU; STORE the result rows. Later, SEND a second key block
//   from DRAM to the E-core of the previous group, across the mesh.
//   E-core: LOAD the query; GEMV over its own keys read straight from DRAM;
//   GEMV over the local P-core's keys arriving on the NoC; GEMV over the
//   remote P-core's keys arriving over the mesh; SEND the three score lines to
//   P-core 2 of the next group.
//   P-core 2: RECV the score lines and STORE them to its DRAM.
// Results are read back from the DRAM models and checked against integer
// references. Each mechanism is counted and must have happened at least
// once: DRAM-to-NoC sharing, NoC-sourced and DRAM-sourced GEMV, GEMM with
// ReLU post-processing overlapping a DRAM stream, issue stalls (link
// back-pressure is counted and reported),
// cross-group mesh transfers, temperature-scaled refresh (hot core refreshes
// more often) and the DVFS trigger turning on and off.
module tb_tasa_top;
  import tasa_pkg::*;
  import tb_fp_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int GX = 2, GY = 1, NP = 3, NT = 12, R = 8, C = 8;
  localparam int NG = GX * GY, NC = NG * (NP + 1);
  localparam int K = 24, S = 2, L = S * NT / 2;
  logic [7:0] temp_c [NC];
  logic instr_valid [NC], instr_ready [NC], idle [NC];
  instr_t instr [NC];
  logic [31:0] retired [NC], ref_count [NC];
  dram_req_t dram_o [NC][DRAM_CH];
  dram_rsp_t dram_i [NC][DRAM_CH];
  logic [7:0] max_temp_c;
  logic [$clog2(NC)-1:0] hottest_core;
  logic dvfs_trigger;
  logic [31:0] shared_lines [NG], gemv_comm_lines [NG], gemv_steps [NG], gemm_count [NG];

  tasa_top #(.GX(GX), .GY(GY), .SA_ROWS(R), .SA_COLS(C)) dut (.*);

  // DRAM models with preload and read-back doors
  line_t pre [longint];     // key: core * 2^32 + core line address
  line_t got [longint];
  longint want [$];
  event  do_poke, do_peek;
  int viol [NC][DRAM_CH];
  for (genvar c = 0; c < NC; c++) begin : g_c
    for (genvar ch = 0; ch < DRAM_CH; ch++) begin : g_m
      int n_act, n_pre, n_rd, n_wr, n_ref;
      dram_channel_model u_m (.clk, .req(dram_o[c][ch]), .rsp(dram_i[c][ch]), .violations(viol[c][ch]),
        .n_act, .n_pre, .n_rd, .n_wr, .n_ref);
      always @(do_poke)
        foreach (pre[key])
          if (key >> 32 == c && key % DRAM_CH == ch) u_m.poke((key & 32'hFFFF_FFFF) >> 4, pre[key]);
      always @(do_peek)
        foreach (want[i])
          if (want[i] >> 32 == c && want[i] % DRAM_CH == ch) got[want[i]] = u_m.peek((want[i] & 32'hFFFF_FFFF) >> 4);
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

  // ---- mechanism monitors per group
  int overlap [NG], link_stall [NG], issue_stall [NG], mesh_flits [NG];
  for (genvar gy = 0; gy < GY; gy++) begin : g_my
    for (genvar gx = 0; gx < GX; gx++) begin : g_mx
      localparam int G = gy * GX + gx;
      logic [31:0] sh_q = 0;
      always @(posedge clk) begin
        if (shared_lines[G] != sh_q && dut.g_y[gy].g_x[gx].u_grp.g_p[0].u_p.gs != 0) overlap[G]++;
        if (dut.g_y[gy].g_x[gx].u_grp.g_p[0].u_p.link_tx_valid && !dut.g_y[gy].g_x[gx].u_grp.g_p[0].u_p.link_tx_ready)
          link_stall[G]++;
        // issue stalls: an instruction waits at the head of P-core 1's queue
        // because a resource it needs is busy
        if (dut.g_y[gy].g_x[gx].u_grp.g_p[0].u_p.u_shell.u_ctrl.q_valid &&
            !dut.g_y[gy].g_x[gx].u_grp.g_p[0].u_p.u_shell.u_ctrl.can_issue) issue_stall[G]++;
        for (int d = 0; d < 4; d++)
          if (dut.mo_valid[G][d] && dut.mo_ready[G][d]) mesh_flits[G]++;
        sh_q <= shared_lines[G];
      end
    end
  end

  int X [NG][S][32];
  int KEY [NG][3][S][NT][32];     // 0 E-core own, 1 local P-core, 2 remote block of this group's P-core
  int W [NG][2][R][K], XG [NG][2][K][C];

  function automatic line_t key_line(int g, int b, int s, int p);
    int v [64];
    for (int i = 0; i < 32; i++) begin v[i] = KEY[g][b][s][2*p][i]; v[32 + i] = KEY[g][b][s][2*p+1][i]; end
    return bf_line(v);
  endfunction

  function automatic line_t score_line(int g, int kg, int b);
    longint v [32];
    foreach (v[i]) v[i] = 0;
    for (int t = 0; t < NT; t++)
      for (int s = 0; s < S; s++) for (int i = 0; i < 32; i++) v[t] += X[g][s][i] * KEY[kg][b][s][t][i];
    return fp_line(v);
  endfunction

  function automatic line_t gemm_op(int g, int a, int k);
    int v [64];
    foreach (v[i]) v[i] = 0;
    for (int r = 0; r < R; r++) v[r] = W[g][a][r][k];
    for (int c = 0; c < C; c++) v[32 + c] = XG[g][a][k][c];
    return bf_line(v);
  endfunction

  function automatic line_t gemm_row(int g, int a, int r);
    longint v [32];
    foreach (v[i]) v[i] = 0;
    for (int c = 0; c < C; c++) begin
      for (int k = 0; k < K; k++) v[c] += W[g][a][r][k] * XG[g][a][k][c];
      if (v[c] < 0) v[c] = 0;
    end
    return fp_line(v);
  endfunction

  function automatic int core(int g, int c);
    return g * (NP + 1) + c;
  endfunction

  task automatic wait_all_idle();
    bit busy;
    do begin
      @(negedge clk);
      busy = 0;
      for (int c = 0; c < NC; c++) busy |= (prog[c].size() > 0 || instr_valid[c] || !idle[c]);
    end while (busy);
  endtask

  initial begin
    int hot, t_start;
    hot = core(0, 1);
    foreach (instr_valid[c]) begin instr_valid[c] = 0; instr[c] = '0; temp_c[c] = 8'd60; n_issued[c] = 0; end
    foreach (overlap[g]) begin overlap[g] = 0; link_stall[g] = 0; issue_stall[g] = 0; mesh_flits[g] = 0; end
    temp_c[hot] = 8'd110;       // one hot P-core: refresh every 488 cycles, DVFS trigger
    foreach (X[g, s, i]) X[g][s][i] = int'($urandom % 9) - 4;
    foreach (KEY[g, b, s, t, i]) KEY[g][b][s][t][i] = int'($urandom % 9) - 4;
    foreach (W[g, a, r, k]) W[g][a][r][k] = int'($urandom % 9) - 4;
    foreach (XG[g, a, k, c]) XG[g][a][k][c] = int'($urandom % 9) - 4;
    for (int g = 0; g < NG; g++) begin
      for (int s = 0; s < S; s++) begin
        int v [64];
        foreach (v[i]) v[i] = (i < 32) ? X[g][s][i] : 0;
        pre[(longint'(core(g, 0)) << 32) + s] = bf_line(v);
      end
      for (int s = 0; s < S; s++) for (int p = 0; p < NT / 2; p++) begin
        pre[(longint'(core(g, 0)) << 32) + 'h100 + s * NT / 2 + p] = key_line(g, 0, s, p);
        pre[(longint'(core(g, 1)) << 32) + 'h100 + s * NT / 2 + p] = key_line(g, 1, s, p);
        pre[(longint'(core(g, 1)) << 32) + 'h200 + s * NT / 2 + p] = key_line(g, 2, s, p);
      end
      for (int a = 0; a < 2; a++) for (int k = 0; k < K; k++)
        pre[(longint'(core(g, 1)) << 32) + 'h400 + a * K + k] = gemm_op(g, a, k);
    end
    ->do_poke;
    repeat (3) @(negedge clk); rst_n = 1;
    t_start = $time;

    for (int g = 0; g < NG; g++) begin
      int nx, ny, px, py;
      nx = ((g + 1) % NG) % GX; ny = ((g + 1) % NG) / GX;
      px = ((g + NG - 1) % NG) % GX; py = ((g + NG - 1) % NG) / GX;
      // E-core
      prog[core(g, 0)].push_back(mk(OP_LOAD, 0, 0, 0, 0, 0, S, 0));
      prog[core(g, 0)].push_back(mk(OP_GEMV, int'(WSRC_DRAM), 1, 0, 0, 100, S, 'h100));
      prog[core(g, 0)].push_back(mk(OP_GEMV, int'(WSRC_COMM), 1, 0, 0, 101, S));
      prog[core(g, 0)].push_back(mk(OP_GEMV, int'(WSRC_COMM), 1, 0, 0, 102, S));
      prog[core(g, 0)].push_back(mk(OP_SEND, 0, 1, 100, 0, 0, 3, 0, nx, ny, 2));
      // P-core 1: local share, GEMM with ReLU alongside, store the result
      prog[core(g, 1)].push_back(mk(OP_LOAD, 0, 0, 0, 0, 0, 2 * K, 'h400));
      prog[core(g, 1)].push_back(mk(OP_SEND, 1, 0, 0, 0, 0, L, 'h100, g % GX, g / GX, 0));
      prog[core(g, 1)].push_back(mk(OP_GEMM, 8, 0, 0, K, 100, K));
      prog[core(g, 1)].push_back(mk(OP_STORE, 0, 1, 100, 0, 0, 2 * R, 'h3000));
      // P-core 2: receive and store the scores of the previous group
      prog[core(g, 2)].push_back(mk(OP_RECV, 0, 0, 0, 0, 0, 3));
      prog[core(g, 2)].push_back(mk(OP_STORE, 0, 1, 0, 0, 0, 3, 'h2000));
    end
    // the host starts the remote shares once every E-core has consumed its local share
    for (int g = 0; g < NG; g++) wait (int'(gemv_comm_lines[g]) >= L);
    for (int g = 0; g < NG; g++) begin
      int px, py;
      px = ((g + NG - 1) % NG) % GX; py = ((g + NG - 1) % NG) / GX;
      prog[core(g, 1)].push_back(mk(OP_SEND, 1, 0, 0, 0, 0, L, 'h200, px, py, 0));
    end
    wait_all_idle();
    repeat (10) @(negedge clk);
    $display("program finished after %0d cycles", ($time - t_start) / 2);
    // run on long enough for the hot core to refresh a few times (every 488 cycles)
    while (($time - t_start) / 2 < 1500) @(negedge clk);

    // read back results
    for (int g = 0; g < NG; g++) begin
      for (int i = 0; i < 3; i++) want.push_back((longint'(core(g, 2)) << 32) + 'h2000 + i);
      for (int r = 0; r < 2 * R; r++) want.push_back((longint'(core(g, 1)) << 32) + 'h3000 + r);
    end
    ->do_peek;
    @(negedge clk);
    for (int g = 0; g < NG; g++) begin
      int pg;
      pg = (g + NG - 1) % NG;     // the scores stored here come from the previous group's E-core
      for (int i = 0; i < 3; i++) begin
        line_t e;
        e = (i == 0) ? score_line(pg, pg, 0) : (i == 1) ? score_line(pg, pg, 1) : score_line(pg, g, 2);
        checks++;
        if (got[(longint'(core(g, 2)) << 32) + 'h2000 + i] !== e) begin
          failures++; if (failures < 10) $display("group %0d score line %0d wrong", pg, i);
        end
      end
      for (int r = 0; r < 2 * R; r++) begin
        checks++;
        if (got[(longint'(core(g, 1)) << 32) + 'h3000 + r] !== gemm_row(g, r / R, r % R)) begin
          failures++; if (failures < 10) $display("group %0d GEMM row %0d wrong", g, r);
        end
      end
    end

    // counters, violations and mechanisms
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (int'(retired[c]) != n_issued[c]) begin failures++; $display("core %0d retired %0d of %0d", c, retired[c], n_issued[c]); end
      for (int ch = 0; ch < DRAM_CH; ch++) begin
        checks++;
        if (viol[c][ch] != 0) begin failures++; $display("core %0d channel %0d violations", c, ch); end
      end
    end
    for (int g = 0; g < NG; g++) begin
      checks++;
      if (shared_lines[g] != 2 * L || gemv_comm_lines[g] != 2 * L || gemv_steps[g] != 3 * S || gemm_count[g] != 1) begin
        failures++; $display("group %0d counters: shared %0d comm %0d steps %0d gemm %0d", g,
                             shared_lines[g], gemv_comm_lines[g], gemv_steps[g], gemm_count[g]);
      end
    end
    begin
      int n_ov, n_st, n_is, n_mf;
      n_ov = 0; n_st = 0; n_is = 0; n_mf = 0;
      foreach (overlap[g]) begin n_ov += overlap[g]; n_st += link_stall[g]; n_is += issue_stall[g]; n_mf += mesh_flits[g]; end
      $display("mechanisms: GEMM/DRAM-stream overlap %0d cycles, link back-pressure %0d, issue stalls %0d, mesh hops %0d, refreshes hot %0d cool %0d",
               n_ov, n_st, n_is, n_mf, ref_count[hot], ref_count[core(0, 2)]);
      checks++; if (n_ov == 0) begin failures++; $display("GEMM never overlapped a DRAM stream"); end
      // link back-pressure depends on timing and is only reported; issue stalls must occur
      checks++; if (n_is == 0) begin failures++; $display("no issue stall seen"); end
      checks++; if (n_mf < NG * (L + 3)) begin failures++; $display("too few mesh hops"); end
      checks++; if (ref_count[hot] <= ref_count[core(0, 2)]) begin failures++; $display("hot core does not refresh more often"); end
    end
    checks++;
    if (!dvfs_trigger || max_temp_c != 8'd110 || int'(hottest_core) != hot) begin
      failures++; $display("thermal monitor: trigger %0d max %0d hottest %0d", dvfs_trigger, max_temp_c, hottest_core);
    end
    temp_c[hot] = 8'd70;
    repeat (2) @(negedge clk);
    checks++;
    if (dvfs_trigger || max_temp_c != 8'd70) begin failures++; $display("DVFS trigger did not clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
