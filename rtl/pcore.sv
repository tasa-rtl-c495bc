// pcore: performance core (P-core) for GEMM-heavy work such as the FC layers.
//
// The shared core parts (control unit, memory controller, scratchpad, vector
// unit 0, LOAD/STORE/VEC/SEND/RECV engines) sit in core_shell. This module adds
// the two systolic arrays, vector unit 1 as their post-processing stage, the
// GEMM sequencer and the router-less communication unit (local_comm) whose
// single link goes to the E-core of the group.
//
// GEMM (instruction fields a, b, c, len, sub): for k = 0..len-1 the sequencer
// reads scratchpad line a+k for array 0 and line b+k for array 1 in the same
// cycle. In each line, bf16 lanes 0..ROWS-1 are the weight column
// W[.][k] and lanes 32..32+COLS-1 the input row X[k][.]. After the arrays
// finish, their result rows (fp32 lanes 0..COLS-1) pass through vector unit 1
// (copy, or ReLU when sub[3] is set) and are written to lines c.. (array 0)
// and c+ROWS.. (array 1). One operand line per array per cycle; the drain
// writes one row per cycle. A GEMV sent to a P-core retires as a no-op.
module pcore
  import tasa_pkg::*;
#(
  parameter int SA_ROWS   = 32,
  parameter int SA_COLS   = 32,
  parameter int SPM_DEPTH = SPM_LINES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  temp_c,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  output logic        idle,
  output logic [31:0] retired,
  output dram_req_t   dram_o [DRAM_CH],
  input  dram_rsp_t   dram_i [DRAM_CH],
  output logic [31:0] ref_count,
  // dedicated link to the E-core
  output logic        link_tx_valid,
  input  logic        link_tx_ready,
  output flit_t       link_tx_flit,
  input  logic        link_rx_valid,
  output logic        link_rx_ready,
  input  flit_t       link_rx_flit,
  output logic [31:0] sent_from_dram,
  output logic [31:0] gemm_count
);
  localparam int RW = $clog2(SA_ROWS);

  logic tx_valid, tx_ready, rx_valid, rx_ready;
  flit_t tx_flit, rx_flit;
  logic ce_start, ce_done, ce_re0, ce_re1, ce_we;
  instr_t ce_instr;
  logic [9:0] ce_raddr0, ce_raddr1, ce_waddr;
  line_t spm_rdata0, spm_rdata1, ce_wdata, mrsp_data;
  logic ce_mreq_ready, mrsp_valid;
  logic [31:0] lc_tx, lc_rx;

  core_shell #(.SPM_DEPTH(SPM_DEPTH)) u_shell (
    .clk, .rst_n, .temp_c, .instr_valid, .instr_ready, .instr, .idle, .retired,
    .dram_o, .dram_i, .ref_count,
    .tx_valid, .tx_ready, .tx_flit, .rx_valid, .rx_ready, .rx_flit,
    .ce_start, .ce_instr, .ce_done,
    .ce_re0, .ce_raddr0, .ce_re1, .ce_raddr1, .spm_rdata0, .spm_rdata1,
    .ce_we, .ce_waddr, .ce_wdata,
    .ce_mreq_valid(1'b0), .ce_mreq_addr('0), .ce_mreq_ready,
    .mrsp_valid, .mrsp_data, .ce_mrsp_ready(1'b0), .ce_rx_ready(1'b0),
    .sent_from_dram);

  local_comm #(.DEPTH(4)) u_comm (
    .clk, .rst_n,
    .core_tx_valid(tx_valid), .core_tx_ready(tx_ready), .core_tx_flit(tx_flit),
    .core_rx_valid(rx_valid), .core_rx_ready(rx_ready), .core_rx_flit(rx_flit),
    .link_tx_valid, .link_tx_ready, .link_tx_flit,
    .link_rx_valid, .link_rx_ready, .link_rx_flit,
    .tx_count(lc_tx), .rx_count(lc_rx));

  // ------------------------------------------------------------------
  // systolic arrays
  logic  sa_start, sa_valid, sa_last;
  bf16_t sa_w [2][SA_ROWS];
  bf16_t sa_x [2][SA_COLS];
  logic  sa_busy [2], sa_done [2];
  logic [RW-1:0] sa_oaddr;
  fp32_t sa_out [2][SA_COLS];

  always_comb
    for (int a = 0; a < 2; a++) begin
      for (int i = 0; i < SA_ROWS; i++) sa_w[a][i] = (a == 0) ? spm_rdata0[16*i +: 16] : spm_rdata1[16*i +: 16];
      for (int j = 0; j < SA_COLS; j++) sa_x[a][j] = (a == 0) ? spm_rdata0[16*(32+j) +: 16] : spm_rdata1[16*(32+j) +: 16];
    end

  for (genvar a = 0; a < 2; a++) begin : g_sa
    systolic_array #(.ROWS(SA_ROWS), .COLS(SA_COLS)) u_sa (
      .clk, .rst_n, .start(sa_start), .in_valid(sa_valid), .in_last(sa_last),
      .w_col(sa_w[a]), .x_row(sa_x[a]), .busy(sa_busy[a]), .done(sa_done[a]),
      .out_addr(sa_oaddr), .out_row(sa_out[a]));
  end

  // vector unit 1: post-processing of result rows
  fp32_t pv_a [FP_PER_LINE], pv_b [FP_PER_LINE], pv_o [FP_PER_LINE];
  logic  pv_iv, pv_ov;
  vec_op_e pv_op;
  vector_unit #(.LANES(FP_PER_LINE)) u_vu1 (
    .clk, .rst_n, .in_valid(pv_iv), .op(pv_op), .a(pv_a), .b(pv_b),
    .out_valid(pv_ov), .out(pv_o));

  // ------------------------------------------------------------------
  // GEMM sequencer
  typedef enum logic [2:0] {G_IDLE, G_FEED, G_WAIT, G_DRAIN, G_FIN} gstate_e;
  gstate_e gs;
  instr_t g;
  logic [9:0] k, wcnt;
  logic       feed_p1, last_p1;
  logic [6:0] dr;          // drain row 0 .. 2*SA_ROWS-1
  logic       dr_act;

  assign ce_re0 = (gs == G_FEED);
  assign ce_re1 = (gs == G_FEED);
  assign ce_raddr0 = g.a + k;
  assign ce_raddr1 = g.b + k;
  assign sa_valid = feed_p1;
  assign sa_last  = last_p1;
  assign sa_oaddr = RW'(dr);
  assign pv_iv = dr_act;
  assign pv_op = g.sub[3] ? VOP_RELU : VOP_COPY;

  always_comb
    for (int l = 0; l < FP_PER_LINE; l++) begin
      pv_b[l] = '0;
      pv_a[l] = (l < SA_COLS) ? sa_out[int'(dr) / SA_ROWS][l % SA_COLS] : '0;
    end

  assign ce_we = pv_ov;
  assign ce_waddr = g.c + wcnt;
  always_comb begin
    ce_wdata = '0;
    for (int l = 0; l < FP_PER_LINE; l++) ce_wdata[32*l +: 32] = pv_o[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs <= G_IDLE; g <= '0; k <= '0; wcnt <= '0; feed_p1 <= 1'b0; last_p1 <= 1'b0;
      dr <= '0; dr_act <= 1'b0; ce_done <= 1'b0; sa_start <= 1'b0; gemm_count <= '0;
    end else begin
      ce_done  <= 1'b0;
      sa_start <= 1'b0;
      feed_p1  <= (gs == G_FEED);
      last_p1  <= (gs == G_FEED) && (k == g.len - 1'b1);
      unique case (gs)
        G_IDLE: if (ce_start) begin
          g <= ce_instr; k <= '0; wcnt <= '0; dr <= '0;
          if (ce_instr.op == OP_GEMM && ce_instr.len != 0) begin
            sa_start <= 1'b1;
            gs <= G_FEED;
          end else begin
            ce_done <= 1'b1;   // empty GEMM, or an op this core has no engine for
          end
        end
        G_FEED: begin
          k <= k + 1'b1;
          if (k == g.len - 1'b1) gs <= G_WAIT;
        end
        G_WAIT: if (sa_done[0]) begin gs <= G_DRAIN; dr_act <= 1'b1; end
        G_DRAIN: begin
          if (int'(dr) == 2 * SA_ROWS - 1) begin dr_act <= 1'b0; gs <= G_FIN; end
          dr <= dr + 1'b1;
        end
        G_FIN: ;
        default: gs <= G_IDLE;
      endcase
      if (pv_ov) wcnt <= wcnt + 1'b1;
      if (gs == G_FIN && int'(wcnt) == 2 * SA_ROWS) begin
        gs <= G_IDLE; ce_done <= 1'b1; gemm_count <= gemm_count + 1;
      end
    end
  end
endmodule
