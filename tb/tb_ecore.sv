// tb_ecore: one E-core at full size (12 MAC trees, 3 P-core links, at mesh
// position (1,1)) with 16 DRAM channel models, driven by a small program:
//   RECV the query slices and key lines from P-core 1's link;
//   GEMV with weights from the scratchpad; SEND the result to P-core 2;
//   STORE the key lines to DRAM and GEMV again with weights read straight
//   from DRAM (bypass) and ReLU; SEND that result over the mesh (east);
//   GEMV with weights streamed by P-core 3 through the NoC (bandwidth-sharing
//   bypass); SEND the result to P-core 1.
// Meanwhile a flit entering from the west for group (2,1) must pass through
// to the east port. Results are checked against integer references; also
// checked: step and bypass-line counters, per-link counters, the GEMV cycle
// count (2 + 6 cycles per step), no DRAM timing violations.
module tb_ecore;
  import tasa_pkg::*;
  import tb_fp_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int NT = 12, NP = 3, S = 4;
  logic [7:0] temp_c;
  logic [GX_W-1:0] my_x = 1;
  logic [GY_W-1:0] my_y = 1;
  logic instr_valid, instr_ready, idle;
  instr_t instr;
  logic [31:0] retired, ref_count, gemv_steps, gemv_comm_lines;
  logic [31:0] p_flits [NP];
  dram_req_t dram_o [DRAM_CH];
  dram_rsp_t dram_i [DRAM_CH];
  logic p_tx_valid [NP], p_tx_ready [NP], p_rx_valid [NP], p_rx_ready [NP];
  flit_t p_tx_flit [NP], p_rx_flit [NP];
  logic m_out_valid [4], m_out_ready [4], m_in_valid [4], m_in_ready [4];
  flit_t m_out_flit [4], m_in_flit [4];

  ecore dut (.*);

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
  always @(posedge clk) if (instr_valid && instr_ready) instr_valid <= 0;

  // ---- P-core links and mesh: sources and expected arrivals
  flit_t to_p [NP][$];
  flit_t to_m [4][$];
  line_t exp_p [NP][$];
  flit_t exp_m [4][$];
  int n_got = 0;
  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < NP; k++) begin
      if (!p_rx_valid[k] && to_p[k].size() > 0 && $urandom % 4 != 0) begin p_rx_flit[k] = to_p[k].pop_front(); p_rx_valid[k] = 1; end
      p_tx_ready[k] = ($urandom % 4 != 0);
    end
    for (int d = 0; d < 4; d++) begin
      if (!m_in_valid[d] && to_m[d].size() > 0) begin m_in_flit[d] = to_m[d].pop_front(); m_in_valid[d] = 1; end
      m_out_ready[d] = ($urandom % 4 != 0);
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NP; k++) begin
      if (p_rx_valid[k] && p_rx_ready[k]) p_rx_valid[k] <= 0;
      if (p_tx_valid[k] && p_tx_ready[k]) begin
        checks++; n_got++;
        if (exp_p[k].size() == 0 || p_tx_flit[k].data !== exp_p[k].pop_front()) begin
          failures++; if (failures < 10) $display("t=%0t wrong flit to P-core %0d", $time, k + 1);
        end
      end
    end
    for (int d = 0; d < 4; d++) begin
      if (m_in_valid[d] && m_in_ready[d]) m_in_valid[d] <= 0;
      if (m_out_valid[d] && m_out_ready[d]) begin
        checks++; n_got++;
        if (exp_m[d].size() == 0 || m_out_flit[d] !== exp_m[d].pop_front()) begin
          failures++; if (failures < 10) $display("t=%0t wrong flit on mesh port %0d", $time, d);
        end
      end
    end
  end

  task automatic wait_idle();
    @(negedge clk);
    while (prog.size() > 0 || instr_valid || !idle) @(negedge clk);
  endtask

  function automatic flit_t fl(line_t l, int x, int y, int core, int tag);
    flit_t f;
    f.hdr.dst_x = GX_W'(x); f.hdr.dst_y = GY_W'(y); f.hdr.dst_core = CID_W'(core); f.hdr.tag = 16'(tag);
    f.data = l;
    return f;
  endfunction

  int X [S][32];
  int W [S][NT][32];
  longint ref_y [NT];

  function automatic line_t w_line(int s, int p);
    int v [64];
    for (int i = 0; i < 32; i++) begin v[i] = W[s][2*p][i]; v[32 + i] = W[s][2*p+1][i]; end
    return bf_line(v);
  endfunction

  function automatic line_t y_line(bit relu);
    longint v [32];
    foreach (v[i]) v[i] = 0;
    for (int t = 0; t < NT; t++) v[t] = (relu && ref_y[t] < 0) ? 0 : ref_y[t];
    return fp_line(v);
  endfunction

  initial begin
    int t0;
    flit_t pass;
    temp_c = 8'd90;
    instr_valid = 0; instr = '0;
    foreach (p_rx_valid[k]) begin p_rx_valid[k] = 0; p_rx_flit[k] = '0; p_tx_ready[k] = 1; end
    foreach (m_in_valid[d]) begin m_in_valid[d] = 0; m_in_flit[d] = '0; m_out_ready[d] = 1; end
    foreach (X[s, i]) X[s][i] = int'($urandom % 15) - 7;
    foreach (W[s, t, i]) W[s][t][i] = int'($urandom % 15) - 7;
    foreach (ref_y[t]) begin
      ref_y[t] = 0;
      for (int s = 0; s < S; s++) for (int i = 0; i < 32; i++) ref_y[t] += X[s][i] * W[s][t][i];
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // query slices to lines 0..S-1, key lines to S.., all from P-core 1
    for (int s = 0; s < S; s++) begin
      int v [64];
      foreach (v[i]) v[i] = (i < 32) ? X[s][i] : 0;
      to_p[0].push_back(fl(bf_line(v), 1, 1, 0, s));
    end
    for (int s = 0; s < S; s++) for (int p = 0; p < NT / 2; p++) to_p[0].push_back(fl(w_line(s, p), 1, 1, 0, 0));
    prog.push_back(mk(OP_RECV, 0, 0, 0, 0, 0, S + S * NT / 2));
    // a flit crossing this group from west to east
    pass = fl('1, 2, 1, 3, 77);
    to_m[3].push_back(pass); exp_m[1].push_back(pass);
    wait_idle();

    // GEMV, weights from the scratchpad
    t0 = $time;
    prog.push_back(mk(OP_GEMV, int'(WSRC_SPM), 1, 0, S, 100, S));
    wait_idle();
    $display("GEMV of %0d steps from the scratchpad took %0d cycles", S, ($time - t0) / 2);
    checks++;
    if (($time - t0) / 2 > S * (2 + NT / 2) + 12) begin failures++; $display("GEMV too slow"); end
    exp_p[1].push_back(y_line(0));
    prog.push_back(mk(OP_SEND, 0, 1, 100, 0, 0, 1, 0, 1, 1, 2));

    // weights through DRAM: store, then GEMV reading DRAM directly, with ReLU
    prog.push_back(mk(OP_STORE, 0, 1, S, 0, 0, S * NT / 2, 'h800));
    prog.push_back(mk(OP_GEMV, int'(WSRC_DRAM) | 8, 1, 0, 0, 101, S, 'h800));
    exp_m[1].push_back(fl(y_line(1), 2, 1, 1, 0));
    prog.push_back(mk(OP_SEND, 0, 1, 101, 0, 0, 1, 0, 2, 1, 1));
    wait_idle();

    // weights streamed by P-core 3 over its link (bypass of the scratchpad)
    for (int s = 0; s < S; s++) for (int p = 0; p < NT / 2; p++) to_p[2].push_back(fl(w_line(s, p), 1, 1, 0, 0));
    prog.push_back(mk(OP_GEMV, int'(WSRC_COMM), 1, 0, 0, 102, S));
    exp_p[0].push_back(y_line(0));
    prog.push_back(mk(OP_SEND, 0, 1, 102, 0, 0, 1, 0, 1, 1, 1));
    wait_idle();
    repeat (20) @(negedge clk);

    checks++;
    if (n_got != 4) begin failures++; $display("%0d flits left the E-core, expected 4", n_got); end
    checks++;
    if (gemv_steps != 3 * S || gemv_comm_lines != S * NT / 2) begin
      failures++; $display("gemv_steps %0d gemv_comm_lines %0d", gemv_steps, gemv_comm_lines);
    end
    checks++;
    if (int'(p_flits[0]) != S + S * NT / 2 || int'(p_flits[2]) != S * NT / 2 || p_flits[1] != 0) begin
      failures++; $display("p_flits %0d %0d %0d", p_flits[0], p_flits[1], p_flits[2]);
    end
    checks++;
    if (int'(retired) != n_issued) begin failures++; $display("retired %0d of %0d", retired, n_issued); end
    for (int c = 0; c < DRAM_CH; c++) begin
      checks++;
      if (viol[c] != 0) begin failures++; $display("channel %0d: %0d violations", c, viol[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
