// ecore: efficiency core (E-core) for memory-bound GEMV work such as attention.
//
// The shared core parts sit in core_shell. This module adds the MAC tree array
// (12 trees of 32), vector unit 1 as its post-processing stage, the GEMV
// sequencer and the Local/Global communication unit (ecore_comm) that links
// the group's P-cores and the mesh router.
//
// GEMV (fields a, b, c, len, daddr, sub): for each of len steps the sequencer
// loads scratchpad line a+s (first 32 bf16 lanes) into the input register, then
// feeds NT/2 weight lines (two trees per line) from the source in sub[1:0]:
//   0 scratchpad lines b + s*NT/2 ..        (local buffer)
//   1 DRAM lines daddr + s*NT/2 ..           (bypasses the scratchpad)
//   2 lines arriving on the NoC, in order     (bypasses the scratchpad; this is
//     how KV-cache lines streamed by the P-cores are consumed)
// The last weight line of a step fires the trees. After len steps the NT fp32
// sums go through vector unit 1 (copy, or ReLU when sub[3] is set) to line c.
// Per step: 2 cycles to load the input, then one weight line per cycle.
// A GEMM sent to an E-core retires as a no-op.
module ecore
  import tasa_pkg::*;
#(
  parameter int NT        = 12,
  parameter int NP        = 3,
  parameter int SPM_DEPTH = SPM_LINES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  temp_c,
  input  logic [GX_W-1:0] my_x,
  input  logic [GY_W-1:0] my_y,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  output logic        idle,
  output logic [31:0] retired,
  output dram_req_t   dram_o [DRAM_CH],
  input  dram_rsp_t   dram_i [DRAM_CH],
  output logic [31:0] ref_count,
  // P-core links
  output logic   p_tx_valid [NP],
  input  logic   p_tx_ready [NP],
  output flit_t  p_tx_flit  [NP],
  input  logic   p_rx_valid [NP],
  output logic   p_rx_ready [NP],
  input  flit_t  p_rx_flit  [NP],
  // mesh links: 0 = north, 1 = east, 2 = south, 3 = west
  output logic   m_out_valid [4],
  input  logic   m_out_ready [4],
  output flit_t  m_out_flit  [4],
  input  logic   m_in_valid  [4],
  output logic   m_in_ready  [4],
  input  flit_t  m_in_flit   [4],
  output logic [31:0] p_flits [NP],
  output logic [31:0] gemv_steps,
  output logic [31:0] gemv_comm_lines   // weight lines taken straight from the NoC
);
  localparam int PAIRS = NT / 2;

  logic tx_valid, tx_ready, rx_valid, rx_ready;
  flit_t tx_flit, rx_flit;
  logic ce_start, ce_done, ce_re0, ce_re1, ce_we;
  instr_t ce_instr;
  logic [9:0] ce_raddr0, ce_raddr1, ce_waddr;
  line_t spm_rdata0, spm_rdata1, ce_wdata, mrsp_data;
  logic ce_mreq_valid, ce_mreq_ready, mrsp_valid, ce_mrsp_ready, ce_rx_ready;
  logic [CORE_LINE_AW-1:0] ce_mreq_addr;
  logic [31:0] unused_sent;

  core_shell #(.SPM_DEPTH(SPM_DEPTH)) u_shell (
    .clk, .rst_n, .temp_c, .instr_valid, .instr_ready, .instr, .idle, .retired,
    .dram_o, .dram_i, .ref_count,
    .tx_valid, .tx_ready, .tx_flit, .rx_valid, .rx_ready, .rx_flit,
    .ce_start, .ce_instr, .ce_done,
    .ce_re0, .ce_raddr0, .ce_re1, .ce_raddr1, .spm_rdata0, .spm_rdata1,
    .ce_we, .ce_waddr, .ce_wdata,
    .ce_mreq_valid, .ce_mreq_addr, .ce_mreq_ready,
    .mrsp_valid, .mrsp_data, .ce_mrsp_ready, .ce_rx_ready,
    .sent_from_dram(unused_sent));

  ecore_comm #(.NP(NP), .DEPTH(4)) u_comm (
    .clk, .rst_n, .my_x, .my_y,
    .core_tx_valid(tx_valid), .core_tx_ready(tx_ready), .core_tx_flit(tx_flit),
    .core_rx_valid(rx_valid), .core_rx_ready(rx_ready), .core_rx_flit(rx_flit),
    .p_tx_valid, .p_tx_ready, .p_tx_flit, .p_rx_valid, .p_rx_ready, .p_rx_flit,
    .m_out_valid, .m_out_ready, .m_out_flit, .m_in_valid, .m_in_ready, .m_in_flit,
    .p_flits);

  // ------------------------------------------------------------------
  // MAC tree array
  typedef enum logic [2:0] {V_IDLE, V_XRD, V_XLD, V_W, V_POST, V_FIN} vstate_e;
  vstate_e vs;
  instr_t g;
  logic [9:0] s;             // step
  logic [3:0] wi;            // scratchpad weight reads issued in this step
  logic       wp1;           // scratchpad weight line valid this cycle
  logic [12:0] dq;           // DRAM weight requests issued
  logic mt_clear, mt_step, spm_rdy, dram_rdy, comm_rdy;
  fp32_t mt_acc [NT];
  line_t mt_out;
  wsrc_e src;
  assign src = wsrc_e'(g.sub[1:0]);

  mac_tree_array #(.NT(NT), .N(32)) u_mta (
    .clk, .rst_n,
    .clear(mt_clear),
    .x_load(vs == V_XLD), .x_line(spm_rdata0),
    .w_src(src),
    .spm_valid(wp1), .spm_ready(spm_rdy), .spm_line(spm_rdata1),
    .dram_valid(vs == V_W && mrsp_valid), .dram_ready(dram_rdy), .dram_line(mrsp_data),
    .comm_valid(vs == V_W && rx_valid), .comm_ready(comm_rdy), .comm_line(rx_flit.data),
    .step(mt_step), .acc(mt_acc), .out_line(mt_out));

  assign ce_re0    = (vs == V_XRD);
  assign ce_raddr0 = g.a + s;
  assign ce_re1    = (vs == V_W) && src == WSRC_SPM && int'(wi) < PAIRS;
  assign ce_raddr1 = 10'(int'(g.b) + int'(s) * PAIRS + int'(wi));
  assign ce_mreq_valid = (vs != V_IDLE) && src == WSRC_DRAM && int'(dq) < int'(g.len) * PAIRS
                         && g.op == OP_GEMV;
  assign ce_mreq_addr  = g.daddr + CORE_LINE_AW'(dq);
  assign ce_mrsp_ready = (vs == V_W) && dram_rdy;
  assign ce_rx_ready   = (vs == V_W) && comm_rdy;

  // vector unit 1: post-processing of the result line
  fp32_t pv_a [FP_PER_LINE], pv_b [FP_PER_LINE], pv_o [FP_PER_LINE];
  logic  pv_ov;
  always_comb
    for (int l = 0; l < FP_PER_LINE; l++) begin
      pv_a[l] = mt_out[32*l +: 32];
      pv_b[l] = '0;
    end
  vector_unit #(.LANES(FP_PER_LINE)) u_vu1 (
    .clk, .rst_n, .in_valid(vs == V_POST), .op(g.sub[3] ? VOP_RELU : VOP_COPY),
    .a(pv_a), .b(pv_b), .out_valid(pv_ov), .out(pv_o));

  assign ce_we    = pv_ov;
  assign ce_waddr = g.c;
  always_comb begin
    ce_wdata = '0;
    for (int l = 0; l < FP_PER_LINE; l++) ce_wdata[32*l +: 32] = pv_o[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs <= V_IDLE; g <= '0; s <= '0; wi <= '0; wp1 <= 1'b0; dq <= '0;
      mt_clear <= 1'b0; ce_done <= 1'b0; gemv_steps <= '0; gemv_comm_lines <= '0;
    end else begin
      ce_done  <= 1'b0;
      mt_clear <= 1'b0;
      wp1 <= ce_re1;
      if (ce_mreq_valid && ce_mreq_ready) dq <= dq + 1'b1;
      if (ce_rx_ready && rx_valid) gemv_comm_lines <= gemv_comm_lines + 1;
      if (mt_step) gemv_steps <= gemv_steps + 1;
      unique case (vs)
        V_IDLE: if (ce_start) begin
          g <= ce_instr; s <= '0; wi <= '0; dq <= '0;
          if (ce_instr.op == OP_GEMV && ce_instr.len != 0) begin
            mt_clear <= 1'b1;
            vs <= V_XRD;
          end else begin
            ce_done <= 1'b1;
          end
        end
        V_XRD: vs <= V_XLD;
        V_XLD: begin vs <= V_W; wi <= '0; end
        V_W: begin
          if (ce_re1) wi <= wi + 1'b1;
          if (mt_step) begin
            s <= s + 1'b1;
            vs <= (s == g.len - 1'b1) ? V_POST : V_XRD;
          end
        end
        V_POST: vs <= V_FIN;
        V_FIN: if (pv_ov) begin vs <= V_IDLE; ce_done <= 1'b1; end
        default: vs <= V_IDLE;
      endcase
    end
  end
endmodule
