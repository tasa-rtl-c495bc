// core_group: one E-core and its P-cores, the node of the global mesh.
//
// Inside a group the network is a fat-tree-like star: every P-core has its own
// link to the E-core (root), which also owns the group's mesh router and acts as
// proxy for all global traffic of the group. With the 3:1 core ratio a group is
// one E-core and three P-cores; the 48-core die is 12 such groups.
//
// Core order inside the group, used for all per-core ports: 0 = E-core,
// 1..NP = P-cores (the same numbers as the `dst_core` field of a flit).
module core_group
  import tasa_pkg::*;
#(
  parameter int NP        = 3,
  parameter int SA_ROWS   = 32,
  parameter int SA_COLS   = 32,
  parameter int NT        = 12,
  parameter int SPM_DEPTH = SPM_LINES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [GX_W-1:0] my_x,
  input  logic [GY_W-1:0] my_y,
  input  logic [7:0]  temp_c      [NP+1],
  input  logic        instr_valid [NP+1],
  output logic        instr_ready [NP+1],
  input  instr_t      instr       [NP+1],
  output logic        idle        [NP+1],
  output logic [31:0] retired     [NP+1],
  output dram_req_t   dram_o      [NP+1][DRAM_CH],
  input  dram_rsp_t   dram_i      [NP+1][DRAM_CH],
  output logic [31:0] ref_count   [NP+1],
  // mesh links: 0 = north, 1 = east, 2 = south, 3 = west
  output logic   m_out_valid [4],
  input  logic   m_out_ready [4],
  output flit_t  m_out_flit  [4],
  input  logic   m_in_valid  [4],
  output logic   m_in_ready  [4],
  input  flit_t  m_in_flit   [4],
  // activity counters
  output logic [31:0] shared_lines,     // lines P-cores streamed from DRAM to the NoC
  output logic [31:0] gemv_comm_lines,  // weight lines the E-core MAC trees took from the NoC
  output logic [31:0] gemv_steps,
  output logic [31:0] gemm_count
);
  logic  p_tx_valid [NP], p_tx_ready [NP], p_rx_valid [NP], p_rx_ready [NP];
  flit_t p_tx_flit [NP], p_rx_flit [NP];
  logic [31:0] p_flits [NP];
  logic [31:0] p_sent [NP];
  logic [31:0] p_gemm [NP];

  ecore #(.NT(NT), .NP(NP), .SPM_DEPTH(SPM_DEPTH)) u_e (
    .clk, .rst_n, .temp_c(temp_c[0]), .my_x, .my_y,
    .instr_valid(instr_valid[0]), .instr_ready(instr_ready[0]), .instr(instr[0]),
    .idle(idle[0]), .retired(retired[0]),
    .dram_o(dram_o[0]), .dram_i(dram_i[0]), .ref_count(ref_count[0]),
    .p_tx_valid, .p_tx_ready, .p_tx_flit, .p_rx_valid, .p_rx_ready, .p_rx_flit,
    .m_out_valid, .m_out_ready, .m_out_flit, .m_in_valid, .m_in_ready, .m_in_flit,
    .p_flits, .gemv_steps, .gemv_comm_lines);

  for (genvar p = 0; p < NP; p++) begin : g_p
    pcore #(.SA_ROWS(SA_ROWS), .SA_COLS(SA_COLS), .SPM_DEPTH(SPM_DEPTH)) u_p (
      .clk, .rst_n, .temp_c(temp_c[p+1]),
      .instr_valid(instr_valid[p+1]), .instr_ready(instr_ready[p+1]), .instr(instr[p+1]),
      .idle(idle[p+1]), .retired(retired[p+1]),
      .dram_o(dram_o[p+1]), .dram_i(dram_i[p+1]), .ref_count(ref_count[p+1]),
      // P-core tx feeds the E-core's P-link input and vice versa
      .link_tx_valid(p_rx_valid[p]), .link_tx_ready(p_rx_ready[p]), .link_tx_flit(p_rx_flit[p]),
      .link_rx_valid(p_tx_valid[p]), .link_rx_ready(p_tx_ready[p]), .link_rx_flit(p_tx_flit[p]),
      .sent_from_dram(p_sent[p]), .gemm_count(p_gemm[p]));
  end

  always_comb begin
    shared_lines = '0;
    gemm_count = '0;
    for (int p = 0; p < NP; p++) begin
      shared_lines = shared_lines + p_sent[p];
      gemm_count   = gemm_count + p_gemm[p];
    end
  end

  // the E-core's per-link counters must agree with what the P-cores sent
  logic [31:0] unused_flits;
  always_comb begin
    unused_flits = '0;
    for (int p = 0; p < NP; p++) unused_flits = unused_flits ^ p_flits[p];
  end
endmodule
