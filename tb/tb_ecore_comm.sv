// tb_ecore_comm: the E-core communication unit of a group at (1,1) of a 3x3
// mesh with 3 P-cores. All sources (E-core, P-core links, the four mesh
// inputs) inject random flits with destinations legal for their port; all
// destinations apply random back-pressure. Each flit must reach exactly the
// endpoint its header names (E-core, P-core link, or the mesh port XY routing
// picks), in order per source/destination pair, and the per-link counters
// must match. A final phase checks that the E-core can stream to all P-cores
// at once at one flit per link per cycle.
module tb_ecore_comm;
  import tasa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int NP = 3, MX = 1, MY = 1;
  localparam int NSRC = NP + 5;   // 0 E, 1..NP P, NP+1..NP+4 mesh N,E,S,W
  logic [GX_W-1:0] my_x = GX_W'(MX);
  logic [GY_W-1:0] my_y = GY_W'(MY);
  logic core_tx_valid, core_tx_ready, core_rx_valid, core_rx_ready;
  flit_t core_tx_flit, core_rx_flit;
  logic p_tx_valid [NP], p_tx_ready [NP], p_rx_valid [NP], p_rx_ready [NP];
  flit_t p_tx_flit [NP], p_rx_flit [NP];
  logic m_out_valid [4], m_out_ready [4], m_in_valid [4], m_in_ready [4];
  flit_t m_out_flit [4], m_in_flit [4];
  logic [31:0] p_flits [NP];

  ecore_comm #(.NP(NP), .DEPTH(4)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // destination index: 0 E-core, 1..NP P-core, NP+1+d mesh port d (N,E,S,W)
  function automatic int dest(flit_t f);
    int x, y;
    x = int'(f.hdr.dst_x); y = int'(f.hdr.dst_y);
    if (x > MX) return NP + 2;
    if (x < MX) return NP + 4;
    if (y > MY) return NP + 3;
    if (y < MY) return NP + 1;
    return int'(f.hdr.dst_core);
  endfunction

  function automatic flit_t mk(int s, int seq);
    flit_t f;
    int x, y, c;
    bit ok;
    do begin
      x = $urandom % 3; y = $urandom % 3; c = $urandom % (NP + 1);
      f = '0;
      f.hdr.dst_x = GX_W'(x); f.hdr.dst_y = GY_W'(y); f.hdr.dst_core = CID_W'(c);
      ok = dest(f) != s;
      if (s == NP + 1) ok = ok && x == MX && y >= MY;      // from north, heading south
      if (s == NP + 3) ok = ok && x == MX && y <= MY;      // from south
      if (s == NP + 2) ok = ok && x <= MX;                 // from east, heading west
      if (s == NP + 4) ok = ok && x >= MX;                 // from west
    end while (!ok);
    f.hdr.tag = 16'({4'(s), 12'(seq)});
    for (int k = 0; k < LINE_W / 32; k++) f.data[32*k +: 32] = $urandom;
    return f;
  endfunction

  flit_t sent [NSRC][$];
  int last_seq [NSRC][NSRC];
  int n_out = 0, NF = 150;
  int seq [NSRC];
  int from_p [NP];
  bit bp = 1;

  task automatic got(int d, flit_t f);
    int s, q;
    s = int'(f.hdr.tag[15:12]); q = int'(f.hdr.tag[11:0]);
    n_out++;
    checks++;
    if (s >= NSRC || dest(f) != d) begin
      failures++; if (failures < 10) $display("flit from %0d delivered to %0d", s, d);
    end else begin
      checks++;
      if (q <= last_seq[s][d] || f !== sent[s][q]) begin
        failures++; if (failures < 10) $display("flit %0d from %0d to %0d out of order or corrupted", q, s, d);
      end
      last_seq[s][d] = q;
    end
  endtask

  // source valid/flit as an array view
  logic  s_valid [NSRC];
  logic  s_ready [NSRC];
  flit_t s_flit  [NSRC];
  always_comb begin
    core_tx_valid = s_valid[0]; core_tx_flit = s_flit[0]; s_ready[0] = core_tx_ready;
    for (int k = 0; k < NP; k++) begin
      p_rx_valid[k] = s_valid[1+k]; p_rx_flit[k] = s_flit[1+k]; s_ready[1+k] = p_rx_ready[k];
    end
    for (int d = 0; d < 4; d++) begin
      m_in_valid[d] = s_valid[NP+1+d]; m_in_flit[d] = s_flit[NP+1+d]; s_ready[NP+1+d] = m_in_ready[d];
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSRC; s++) if (s_valid[s] && s_ready[s]) begin
      s_valid[s] <= 0;
      if (s >= 1 && s <= NP) from_p[s-1]++;
    end
    if (core_rx_valid && core_rx_ready) got(0, core_rx_flit);
    for (int k = 0; k < NP; k++) if (p_tx_valid[k] && p_tx_ready[k]) got(1 + k, p_tx_flit[k]);
    for (int d = 0; d < 4; d++) if (m_out_valid[d] && m_out_ready[d]) got(NP + 1 + d, m_out_flit[d]);
  end

  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < NSRC; s++)
      if (!s_valid[s] && seq[s] < NF && (!bp || $urandom % 2 == 0)) begin
        s_flit[s] = mk(s, seq[s]); sent[s].push_back(s_flit[s]); seq[s]++; s_valid[s] = 1;
      end
    core_rx_ready = !bp || $urandom % 3 != 0;
    for (int k = 0; k < NP; k++) p_tx_ready[k] = !bp || $urandom % 3 != 0;
    for (int d = 0; d < 4; d++) m_out_ready[d] = !bp || $urandom % 3 != 0;
  end

  initial begin
    int t0, n0;
    foreach (s_valid[s]) begin s_valid[s] = 0; s_flit[s] = '0; seq[s] = 0; end
    foreach (last_seq[a, b]) last_seq[a][b] = -1;
    foreach (from_p[k]) from_p[k] = 0;
    core_rx_ready = 0;
    foreach (p_tx_ready[k]) p_tx_ready[k] = 0;
    foreach (m_out_ready[d]) m_out_ready[d] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (n_out == NSRC * NF);
    repeat (5) @(negedge clk);
    for (int k = 0; k < NP; k++) begin
      checks++;
      if (int'(p_flits[k]) != from_p[k]) begin failures++; $display("p_flits[%0d] %0d expected %0d", k, p_flits[k], from_p[k]); end
    end
    // E-core streams to P-cores while each P-core streams to the E-core's
    // neighbour P-core: every link busy every cycle
    bp = 0; NF = 0;
    @(negedge clk);
    n0 = n_out; t0 = $time;
    for (int i = 0; i < 90; i++) begin
      for (int k = 0; k <= NP; k++) begin
        flit_t f;
        f = '0; f.hdr.dst_x = MX; f.hdr.dst_y = MY;
        f.hdr.dst_core = (k == 0) ? CID_W'(2) : (k == 1) ? CID_W'(0) : CID_W'(1 + k % NP);
        f.hdr.tag = 16'({4'(k), 12'(sent[k].size())});
        sent[k].push_back(f);
        s_flit[k] = f; s_valid[k] = 1;
      end
      do @(negedge clk); while (s_valid[0] || s_valid[1] || s_valid[2] || s_valid[3]);
    end
    wait (n_out == n0 + 360);
    checks++;
    if (($time - t0) / 2 > 90 + 10) begin failures++; $display("360 flits on 4 links took %0d cycles", ($time - t0) / 2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
