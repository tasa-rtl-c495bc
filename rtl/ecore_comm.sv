// ecore_comm: Local/Global communication unit of the E-core.
//
// The E-core is the root of its core group's fat-tree-like local network and
// the group's proxy on the global mesh. This unit joins three kinds of
// endpoints: the E-core itself, one dedicated link per P-core of the group, and
// the mesh router (global traffic). A flit whose destination group is another
// group goes to the router's local input; a flit for this group goes to the
// E-core (core id 0) or to the P-core link of its core id (1..NP). Flits
// arriving from the router's local output are for this group by construction.
//
// Every source has an input FIFO; every destination grants one source per
// cycle round-robin, so the E-core can exchange flits with all its P-cores and
// the mesh in the same cycle (one flit per link per cycle, the link bandwidth
// matching one core's DRAM bandwidth). Flits for the E-core wait in a receive
// FIFO. Per-link flit counters are exported.
//
// Source/destination index: 0 = E-core, 1..NP = P-core links, NP+1 = router.
//
// From the paper: dedicated E-core to P-core paths, the E-core as root and as
// proxy to the 2D mesh, router with FIFOs. Own choices: switching between the
// paths, FIFO depths, round-robin arbitration.
module ecore_comm
  import tasa_pkg::*;
#(
  parameter int NP    = 3,
  parameter int DEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [GX_W-1:0] my_x,
  input  logic [GY_W-1:0] my_y,
  // E-core side
  input  logic   core_tx_valid,
  output logic   core_tx_ready,
  input  flit_t  core_tx_flit,
  output logic   core_rx_valid,
  input  logic   core_rx_ready,
  output flit_t  core_rx_flit,
  // P-core links (to/from each P-core's local_comm)
  output logic   p_tx_valid [NP],
  input  logic   p_tx_ready [NP],
  output flit_t  p_tx_flit  [NP],
  input  logic   p_rx_valid [NP],
  output logic   p_rx_ready [NP],
  input  flit_t  p_rx_flit  [NP],
  // mesh links, index 0 = north, 1 = east, 2 = south, 3 = west
  output logic   m_out_valid [4],
  input  logic   m_out_ready [4],
  output flit_t  m_out_flit  [4],
  input  logic   m_in_valid  [4],
  output logic   m_in_ready  [4],
  input  flit_t  m_in_flit   [4],
  output logic [31:0] p_flits [NP]    // flits received from each P-core
);
  localparam int NS = NP + 2;   // sources = destinations
  localparam int R  = NP + 1;   // router index

  // router
  logic  r_in_valid [5], r_in_ready [5], r_out_valid [5], r_out_ready [5];
  flit_t r_in_flit [5], r_out_flit [5];

  noc_router #(.DEPTH(2)) u_router (
    .clk, .rst_n, .my_x, .my_y,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit));

  for (genvar k = 0; k < 4; k++) begin : g_mesh
    assign r_in_valid[k+1]  = m_in_valid[k];
    assign m_in_ready[k]    = r_in_ready[k+1];
    assign r_in_flit[k+1]   = m_in_flit[k];
    assign m_out_valid[k]   = r_out_valid[k+1];
    assign r_out_ready[k+1] = m_out_ready[k];
    assign m_out_flit[k]    = r_out_flit[k+1];
  end

  // sources: input FIFOs for the E-core and the P-links; router local output
  logic  s_valid [NS], s_pop [NS];
  flit_t s_flit  [NS];

  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_src_e (
    .clk, .rst_n,
    .in_valid(core_tx_valid), .in_ready(core_tx_ready), .in_data(core_tx_flit),
    .out_valid(s_valid[0]), .out_ready(s_pop[0]), .out_data(s_flit[0]));
  for (genvar p = 0; p < NP; p++) begin : g_psrc
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_src_p (
      .clk, .rst_n,
      .in_valid(p_rx_valid[p]), .in_ready(p_rx_ready[p]), .in_data(p_rx_flit[p]),
      .out_valid(s_valid[p+1]), .out_ready(s_pop[p+1]), .out_data(s_flit[p+1]));
  end
  assign s_valid[R]     = r_out_valid[0];
  assign s_flit[R]      = r_out_flit[0];
  assign r_out_ready[0] = s_pop[R];

  // destination of each source head
  logic [$clog2(NS)-1:0] s_dst [NS];
  always_comb
    for (int s = 0; s < NS; s++) begin
      if (s != R && (s_flit[s].hdr.dst_x != my_x || s_flit[s].hdr.dst_y != my_y))
        s_dst[s] = $clog2(NS)'(R);
      else if (int'(s_flit[s].hdr.dst_core) <= NP)
        s_dst[s] = $clog2(NS)'(s_flit[s].hdr.dst_core);
      else
        s_dst[s] = '0;   // unknown core id: deliver to the E-core
    end

  // destinations: E-core receive FIFO, P-links, router local input
  logic  d_valid [NS], d_ready [NS];
  flit_t d_flit  [NS];

  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_dst_e (
    .clk, .rst_n,
    .in_valid(d_valid[0]), .in_ready(d_ready[0]), .in_data(d_flit[0]),
    .out_valid(core_rx_valid), .out_ready(core_rx_ready), .out_data(core_rx_flit));
  for (genvar p = 0; p < NP; p++) begin : g_pdst
    assign p_tx_valid[p] = d_valid[p+1];
    assign d_ready[p+1]  = p_tx_ready[p];
    assign p_tx_flit[p]  = d_flit[p+1];
  end
  assign r_in_valid[0] = d_valid[R];
  assign d_ready[R]    = r_in_ready[0];
  assign r_in_flit[0]  = d_flit[R];

  logic [$clog2(NS)-1:0] rr [NS], grant [NS];
  logic gv [NS];
  always_comb begin
    for (int d = 0; d < NS; d++) begin
      gv[d] = 1'b0;
      grant[d] = '0;
      for (int k = 0; k < NS; k++) begin
        int s;
        s = (int'(rr[d]) + k) % NS;
        if (!gv[d] && s_valid[s] && int'(s_dst[s]) == d && s != d) begin
          gv[d] = 1'b1; grant[d] = $clog2(NS)'(s);
        end
      end
      d_valid[d] = gv[d];
      d_flit[d]  = s_flit[grant[d]];
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) s_pop[s] = 1'b0;
    for (int d = 0; d < NS; d++)
      if (gv[d] && d_ready[d]) s_pop[grant[d]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NS; d++) rr[d] <= '0;
      for (int p = 0; p < NP; p++) p_flits[p] <= '0;
    end else begin
      for (int d = 0; d < NS; d++)
        if (gv[d] && d_ready[d]) rr[d] <= (int'(grant[d]) == NS - 1) ? '0 : grant[d] + 1'b1;
      for (int p = 0; p < NP; p++)
        if (p_rx_valid[p] && p_rx_ready[p]) p_flits[p] <= p_flits[p] + 1;
    end
  end
endmodule
