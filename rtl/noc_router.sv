// noc_router: 2D-mesh router of the global NoC between core groups.
//
// Only E-cores carry a router: each core group is one mesh node and its E-core
// is the group's proxy. Five ports: local (the E-core's communication unit)
// and north, east, south, west. Every input has a small FIFO; a flit at the
// head of an input FIFO is routed dimension-order (X first, then Y; y grows
// toward south) using the destination group in its header. Each output grants
// one input per cycle, round-robin, so one 128-byte flit per port per cycle
// moves when the next FIFO can take it (valid/ready on every link). X-Y
// routing on a mesh cannot deadlock.
//
// Ports are arrays indexed 0 = local, 1 = north, 2 = east, 3 = south,
// 4 = west. `my_x`/`my_y` give the node's position.
//
// From the paper: the router in the E-core's communication unit, input FIFOs,
// the 2D mesh, 128-byte flits. Own choices: dimension-order routing,
// round-robin arbitration, FIFO depth, single-flit packets.
module noc_router
  import tasa_pkg::*;
#(
  parameter int DEPTH = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [GX_W-1:0] my_x,
  input  logic [GY_W-1:0] my_y,
  input  logic            in_valid  [5],
  output logic            in_ready  [5],
  input  flit_t           in_flit   [5],
  output logic            out_valid [5],
  input  logic            out_ready [5],
  output flit_t           out_flit  [5]
);
  localparam int P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic  h_valid [5];
  logic  h_pop   [5];
  flit_t h_flit  [5];
  logic [2:0] h_dir [5];

  for (genvar p = 0; p < 5; p++) begin : g_in
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(in_valid[p]), .in_ready(in_ready[p]), .in_data(in_flit[p]),
      .out_valid(h_valid[p]), .out_ready(h_pop[p]), .out_data(h_flit[p]));
  end

  always_comb
    for (int p = 0; p < 5; p++) begin
      if (h_flit[p].hdr.dst_x > my_x)      h_dir[p] = 3'(P_E);
      else if (h_flit[p].hdr.dst_x < my_x) h_dir[p] = 3'(P_W);
      else if (h_flit[p].hdr.dst_y > my_y) h_dir[p] = 3'(P_S);
      else if (h_flit[p].hdr.dst_y < my_y) h_dir[p] = 3'(P_N);
      else                                 h_dir[p] = 3'(P_L);
    end

  logic [2:0] rr    [5];
  logic [2:0] grant [5];
  logic       gvld  [5];

  // grants depend only on FIFO heads; pops are computed separately so that
  // the ready inputs never feed back into the valid outputs
  always_comb begin
    for (int o = 0; o < 5; o++) begin
      gvld[o]  = 1'b0;
      grant[o] = '0;
      for (int k = 0; k < 5; k++) begin
        logic [2:0] i;
        i = 3'((int'(rr[o]) + k) % 5);
        if (!gvld[o] && h_valid[i] && int'(h_dir[i]) == o) begin
          gvld[o] = 1'b1; grant[o] = i;
        end
      end
      out_valid[o] = gvld[o];
      out_flit[o]  = h_flit[grant[o]];
    end
  end

  always_comb begin
    for (int p = 0; p < 5; p++) h_pop[p] = 1'b0;
    for (int o = 0; o < 5; o++)
      if (gvld[o] && out_ready[o]) h_pop[grant[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 5; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < 5; o++)
        if (gvld[o] && out_ready[o]) rr[o] <= (grant[o] == 3'd4) ? 3'd0 : grant[o] + 3'd1;
    end
  end
endmodule
