// tasa_top: the Tasa logic die, core groups on a 2D mesh.
//
// GX x GY core groups (4 x 3 by default), each one E-core and NP P-cores
// (3:1 ratio), give the 48-core die; neighbouring groups' E-core routers are
// linked north/east/south/west. Links at the mesh edge are tied off. Every
// core has its own instruction port (fed by the host through the device
// interface, which is outside this RTL), its own 16 DRAM bank-group ports
// (to the stacked DRAM dies, also outside) and its own temperature input. A
// thermal monitor over all cores raises the DVFS trigger above 85 C.
//
// Core numbering: core = (gy * GX + gx) * (NP + 1) + k, with k = 0 for the
// group's E-core and 1..NP for its P-cores; a flit addresses it as
// (dst_x = gx, dst_y = gy, dst_core = k).
module tasa_top
  import tasa_pkg::*;
#(
  parameter int GX        = 4,
  parameter int GY        = 3,
  parameter int NP        = 3,
  parameter int SA_ROWS   = 32,
  parameter int SA_COLS   = 32,
  parameter int NT        = 12,
  parameter int SPM_DEPTH = SPM_LINES,
  localparam int NG       = GX * GY,
  localparam int NC       = NG * (NP + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  temp_c      [NC],
  input  logic        instr_valid [NC],
  output logic        instr_ready [NC],
  input  instr_t      instr       [NC],
  output logic        idle        [NC],
  output logic [31:0] retired     [NC],
  output dram_req_t   dram_o      [NC][DRAM_CH],
  input  dram_rsp_t   dram_i      [NC][DRAM_CH],
  output logic [31:0] ref_count   [NC],
  output logic [7:0]  max_temp_c,
  output logic [$clog2(NC)-1:0] hottest_core,
  output logic        dvfs_trigger,
  output logic [31:0] shared_lines    [NG],
  output logic [31:0] gemv_comm_lines [NG],
  output logic [31:0] gemv_steps      [NG],
  output logic [31:0] gemm_count      [NG]
);
  localparam int N_ = 0, E_ = 1, S_ = 2, W_ = 3;

  logic  mo_valid [NG][4], mo_ready [NG][4], mi_valid [NG][4], mi_ready [NG][4];
  flit_t mo_flit  [NG][4], mi_flit  [NG][4];

  for (genvar gy = 0; gy < GY; gy++) begin : g_y
    for (genvar gx = 0; gx < GX; gx++) begin : g_x
      localparam int G = gy * GX + gx;
      localparam int C0 = G * (NP + 1);

      core_group #(.NP(NP), .SA_ROWS(SA_ROWS), .SA_COLS(SA_COLS), .NT(NT),
                   .SPM_DEPTH(SPM_DEPTH)) u_grp (
        .clk, .rst_n,
        .my_x(GX_W'(gx)), .my_y(GY_W'(gy)),
        .temp_c(temp_c[C0 +: NP+1]),
        .instr_valid(instr_valid[C0 +: NP+1]), .instr_ready(instr_ready[C0 +: NP+1]),
        .instr(instr[C0 +: NP+1]),
        .idle(idle[C0 +: NP+1]), .retired(retired[C0 +: NP+1]),
        .dram_o(dram_o[C0 +: NP+1]), .dram_i(dram_i[C0 +: NP+1]),
        .ref_count(ref_count[C0 +: NP+1]),
        .m_out_valid(mo_valid[G]), .m_out_ready(mo_ready[G]), .m_out_flit(mo_flit[G]),
        .m_in_valid(mi_valid[G]), .m_in_ready(mi_ready[G]), .m_in_flit(mi_flit[G]),
        .shared_lines(shared_lines[G]), .gemv_comm_lines(gemv_comm_lines[G]),
        .gemv_steps(gemv_steps[G]), .gemm_count(gemm_count[G]));

      // neighbour links: my output d feeds the neighbour's input from the opposite side
      if (gy > 0) begin : g_n
        assign mi_valid[G][N_] = mo_valid[G-GX][S_];
        assign mi_flit[G][N_]  = mo_flit[G-GX][S_];
        assign mo_ready[G-GX][S_] = mi_ready[G][N_];
      end else begin : g_nt
        assign mi_valid[G][N_] = 1'b0;
        assign mi_flit[G][N_]  = '0;
        assign mo_ready[G][N_] = 1'b0;
      end
      if (gy < GY - 1) begin : g_s
        assign mi_valid[G][S_] = mo_valid[G+GX][N_];
        assign mi_flit[G][S_]  = mo_flit[G+GX][N_];
        assign mo_ready[G+GX][N_] = mi_ready[G][S_];
      end else begin : g_st
        assign mi_valid[G][S_] = 1'b0;
        assign mi_flit[G][S_]  = '0;
        assign mo_ready[G][S_] = 1'b0;
      end
      if (gx > 0) begin : g_w
        assign mi_valid[G][W_] = mo_valid[G-1][E_];
        assign mi_flit[G][W_]  = mo_flit[G-1][E_];
        assign mo_ready[G-1][E_] = mi_ready[G][W_];
      end else begin : g_wt
        assign mi_valid[G][W_] = 1'b0;
        assign mi_flit[G][W_]  = '0;
        assign mo_ready[G][W_] = 1'b0;
      end
      if (gx < GX - 1) begin : g_e
        assign mi_valid[G][E_] = mo_valid[G+1][W_];
        assign mi_flit[G][E_]  = mo_flit[G+1][W_];
        assign mo_ready[G+1][W_] = mi_ready[G][E_];
      end else begin : g_et
        assign mi_valid[G][E_] = 1'b0;
        assign mi_flit[G][E_]  = '0;
        assign mo_ready[G][E_] = 1'b0;
      end
    end
  end

  thermal_monitor #(.NCORES(NC), .THRESHOLD_C(8'd85)) u_tm (
    .clk, .rst_n, .temp_c, .max_temp_c, .hottest(hottest_core), .dvfs_trigger);
endmodule
