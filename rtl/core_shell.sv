// core_shell: the parts P-cores and E-cores have in common.
//
// Both core types hold a control unit, a memory controller for the 16 bank
// groups above the core, a 128 KB scratchpad and a vector unit; they differ in
// the compute engine (systolic arrays or MAC trees) and the communication unit.
// This module holds the common parts and the engines for the instructions both
// cores execute:
//   LOAD   DRAM lines daddr..+len-1 -> scratchpad a..; requests at up to one
//          per cycle, lines written as they return.
//   STORE  scratchpad a.. -> DRAM daddr..; done when all writes completed.
//   VEC    c[i] = a[i] op b[i] on vector unit 0, one line per cycle, pipelined
//          (read, compute, write).
//   SEND   len lines from the scratchpad (sub 0) or straight from DRAM (sub 1)
//          to the NoC, as flits for (dst_x, dst_y, dst_core) tagged with their
//          index. Sending from DRAM is the bandwidth-sharing path: a P-core
//          streams KV-cache lines from its DRAM to its E-core without touching
//          its scratchpad or its systolic arrays.
//   RECV   len flits from the NoC -> scratchpad a..
// GEMM and GEMV go to the compute engine outside through the `ce_*` port,
// which may then use both scratchpad read ports, the write port, memory reads
// and received flits. The control unit never runs two operations that need the
// same resource, so the ports are shared by plain multiplexing.
//
// Timing: one line per cycle for LOAD, VEC, SEND and RECV when nothing stalls;
// STORE moves one line per three cycles.
module core_shell
  import tasa_pkg::*;
#(
  parameter int SPM_DEPTH = SPM_LINES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  temp_c,
  // instructions
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  output logic        idle,
  output logic [31:0] retired,
  // DRAM bank groups
  output dram_req_t   dram_o [DRAM_CH],
  input  dram_rsp_t   dram_i [DRAM_CH],
  output logic [31:0] ref_count,
  // communication unit
  output logic        tx_valid,
  input  logic        tx_ready,
  output flit_t       tx_flit,
  input  logic        rx_valid,
  output logic        rx_ready,
  input  flit_t       rx_flit,
  // compute engine
  output logic        ce_start,
  output instr_t      ce_instr,
  input  logic        ce_done,
  input  logic        ce_re0,
  input  logic [9:0]  ce_raddr0,
  input  logic        ce_re1,
  input  logic [9:0]  ce_raddr1,
  output line_t       spm_rdata0,
  output line_t       spm_rdata1,
  input  logic        ce_we,
  input  logic [9:0]  ce_waddr,
  input  line_t       ce_wdata,
  input  logic        ce_mreq_valid,
  input  logic [CORE_LINE_AW-1:0] ce_mreq_addr,
  output logic        ce_mreq_ready,
  output logic        mrsp_valid,
  output line_t       mrsp_data,
  input  logic        ce_mrsp_ready,
  input  logic        ce_rx_ready,
  output logic [31:0] sent_from_dram   // lines sent by SEND from DRAM
);
  localparam int SAW = $clog2(SPM_DEPTH);
  localparam int TAG_W = 12;

  // ------------------------------------------------------------------
  // control unit
  logic   start [N_OPS];
  logic   done  [N_OPS];
  instr_t iss;

  control_unit u_ctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .start, .issued(iss), .done, .idle, .retired);

  logic gemm_run;
  assign ce_start = start[OP_GEMM] | start[OP_GEMV];
  assign ce_instr = iss;
  assign done[OP_NOP]  = 1'b0;
  assign done[OP_GEMM] = ce_done && gemm_run;
  assign done[OP_GEMV] = ce_done && !gemm_run;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) gemm_run <= 1'b0;
    else if (ce_start) gemm_run <= start[OP_GEMM];

  // ------------------------------------------------------------------
  // scratchpad and memory controller
  logic spm_re0, spm_re1, spm_we;
  logic [SAW-1:0] spm_ra0, spm_ra1, spm_wa;
  line_t spm_wd;

  scratchpad #(.LINES(SPM_DEPTH)) u_spm (
    .clk,
    .re0(spm_re0), .raddr0(spm_ra0), .rdata0(spm_rdata0),
    .re1(spm_re1), .raddr1(spm_ra1), .rdata1(spm_rdata1),
    .we(spm_we), .waddr(spm_wa), .wdata(spm_wd));

  logic m_req_valid, m_req_ready, m_req_write, m_rsp_ready;
  logic [CORE_LINE_AW-1:0] m_req_addr;
  line_t m_req_wdata;
  logic [TAG_W-1:0] m_req_tag, m_rsp_tag;
  logic [4:0] m_wack;
  logic [15:0] ref_interval;

  mem_ctrl #(.TAG_W(TAG_W)) u_mc (
    .clk, .rst_n, .temp_c,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_write(m_req_write),
    .req_addr(m_req_addr), .req_wdata(m_req_wdata), .req_tag(m_req_tag),
    .rsp_valid(mrsp_valid), .rsp_ready(m_rsp_ready), .rsp_data(mrsp_data), .rsp_tag(m_rsp_tag),
    .wack(m_wack), .dram_o, .dram_i, .ref_interval, .ref_count);

  // ------------------------------------------------------------------
  // LOAD
  logic ld_act;
  logic [9:0] ld_i, ld_r;
  instr_t ld;
  logic ld_req, ld_rsp;
  assign ld_req = ld_act && ld_i < ld.len;
  assign ld_rsp = ld_act && mrsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_act <= 1'b0; ld_i <= '0; ld_r <= '0; ld <= '0; done[OP_LOAD] <= 1'b0;
    end else begin
      done[OP_LOAD] <= 1'b0;
      if (start[OP_LOAD]) begin
        ld_act <= 1'b1; ld <= iss; ld_i <= '0; ld_r <= '0;
      end else if (ld_act) begin
        if (ld_req && m_req_ready) ld_i <= ld_i + 1'b1;
        if (ld_rsp) ld_r <= ld_r + 1'b1;
        if (ld_r == ld.len) begin ld_act <= 1'b0; done[OP_LOAD] <= 1'b1; end
      end
    end
  end

  // ------------------------------------------------------------------
  // STORE
  logic st_act, st_pend, st_have;
  logic [9:0] st_i, st_ack;
  line_t st_buf;
  instr_t st;
  logic st_rd;
  assign st_rd = st_act && !st_pend && !st_have && st_i < st.len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_act <= 1'b0; st_pend <= 1'b0; st_have <= 1'b0; st_i <= '0; st_ack <= '0;
      st_buf <= '0; st <= '0; done[OP_STORE] <= 1'b0;
    end else begin
      done[OP_STORE] <= 1'b0;
      if (start[OP_STORE]) begin
        st_act <= 1'b1; st <= iss; st_i <= '0; st_ack <= '0; st_pend <= 1'b0; st_have <= 1'b0;
      end else if (st_act) begin
        st_pend <= st_rd;
        if (st_pend) begin st_buf <= spm_rdata0; st_have <= 1'b1; end
        if (st_have && m_req_ready) begin st_have <= 1'b0; st_i <= st_i + 1'b1; end
        st_ack <= st_ack + 10'(m_wack);
        if (st_ack == st.len) begin st_act <= 1'b0; done[OP_STORE] <= 1'b1; end
      end
    end
  end

  // ------------------------------------------------------------------
  // VEC on vector unit 0
  logic vc_act, vc_rd, vc_p1;
  logic [9:0] vc_i, vc_w;
  instr_t vc;
  fp32_t vu_a [FP_PER_LINE], vu_b [FP_PER_LINE], vu_o [FP_PER_LINE];
  logic vu_ov;
  assign vc_rd = vc_act && vc_i < vc.len;
  always_comb
    for (int l = 0; l < FP_PER_LINE; l++) begin
      vu_a[l] = spm_rdata0[32*l +: 32];
      vu_b[l] = spm_rdata1[32*l +: 32];
    end

  vector_unit #(.LANES(FP_PER_LINE)) u_vu0 (
    .clk, .rst_n, .in_valid(vc_p1), .op(vec_op_e'(vc.sub[2:0])),
    .a(vu_a), .b(vu_b), .out_valid(vu_ov), .out(vu_o));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vc_act <= 1'b0; vc_p1 <= 1'b0; vc_i <= '0; vc_w <= '0; vc <= '0; done[OP_VEC] <= 1'b0;
    end else begin
      done[OP_VEC] <= 1'b0;
      vc_p1 <= vc_rd;
      if (start[OP_VEC]) begin
        vc_act <= 1'b1; vc <= iss; vc_i <= '0; vc_w <= '0;
      end else if (vc_act) begin
        if (vc_rd) vc_i <= vc_i + 1'b1;
        if (vu_ov) vc_w <= vc_w + 1'b1;
        if (vc_w == vc.len) begin vc_act <= 1'b0; done[OP_VEC] <= 1'b1; end
      end
    end
  end

  // ------------------------------------------------------------------
  // SEND
  logic sd_act, sd_pend;
  logic [9:0] sd_i, sd_n;
  logic [2:0] sd_occ;
  instr_t sd;
  logic sd_rd, sd_mreq, sd_push, sd_bvalid, sd_bready, sd_pop;
  line_t sd_bin, sd_bout;
  assign sd_rd   = sd_act && !sd.sub[0] && sd_i < sd.len && (int'(sd_occ) + int'(sd_pend) < 3);
  assign sd_mreq = sd_act && sd.sub[0] && sd_i < sd.len;
  assign sd_push = sd_act && (sd.sub[0] ? mrsp_valid : sd_pend);
  assign sd_bin  = sd.sub[0] ? mrsp_data : spm_rdata0;
  assign sd_pop  = sd_bvalid && tx_ready;

  sync_fifo #(.WIDTH(LINE_W), .DEPTH(4)) u_sdbuf (
    .clk, .rst_n,
    .in_valid(sd_push), .in_ready(sd_bready), .in_data(sd_bin),
    .out_valid(sd_bvalid), .out_ready(sd_pop), .out_data(sd_bout));

  assign tx_valid = sd_bvalid;
  assign tx_flit  = '{hdr: '{dst_x: sd.dst_x, dst_y: sd.dst_y, dst_core: sd.dst_core, tag: 16'(sd_n)},
                      data: sd_bout};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sd_act <= 1'b0; sd_pend <= 1'b0; sd_i <= '0; sd_n <= '0; sd_occ <= '0; sd <= '0;
      done[OP_SEND] <= 1'b0; sent_from_dram <= '0;
    end else begin
      done[OP_SEND] <= 1'b0;
      sd_pend <= sd_rd;
      sd_occ  <= sd_occ + 3'(sd_push && sd_bready) - 3'(sd_pop);
      if (start[OP_SEND]) begin
        sd_act <= 1'b1; sd <= iss; sd_i <= '0; sd_n <= '0;
      end else if (sd_act) begin
        if (sd_rd || (sd_mreq && m_req_ready)) sd_i <= sd_i + 1'b1;
        if (sd_pop) begin
          sd_n <= sd_n + 1'b1;
          if (sd.sub[0]) sent_from_dram <= sent_from_dram + 1;
        end
        if (sd_n == sd.len) begin sd_act <= 1'b0; done[OP_SEND] <= 1'b1; end
      end
    end
  end

  // ------------------------------------------------------------------
  // RECV
  logic rv_act;
  logic [9:0] rv_n;
  instr_t rv;
  logic rv_take;
  assign rv_take = rv_act && rv_n < rv.len && rx_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv_act <= 1'b0; rv_n <= '0; rv <= '0; done[OP_RECV] <= 1'b0;
    end else begin
      done[OP_RECV] <= 1'b0;
      if (start[OP_RECV]) begin
        rv_act <= 1'b1; rv <= iss; rv_n <= '0;
      end else if (rv_act) begin
        if (rv_take) rv_n <= rv_n + 1'b1;
        if (rv_n == rv.len) begin rv_act <= 1'b0; done[OP_RECV] <= 1'b1; end
      end
    end
  end
  assign rx_ready = rv_take || ce_rx_ready;

  // ------------------------------------------------------------------
  // shared ports
  always_comb begin
    // scratchpad read port 0
    spm_re0 = 1'b1;
    if (st_rd)       spm_ra0 = SAW'(st.a + st_i);
    else if (vc_rd)  spm_ra0 = SAW'(vc.a + vc_i);
    else if (sd_rd)  spm_ra0 = SAW'(sd.a + sd_i);
    else if (ce_re0) spm_ra0 = SAW'(ce_raddr0);
    else begin spm_ra0 = '0; spm_re0 = 1'b0; end
    // read port 1
    spm_re1 = 1'b1;
    if (vc_rd)       spm_ra1 = SAW'(vc.b + vc_i);
    else if (ce_re1) spm_ra1 = SAW'(ce_raddr1);
    else begin spm_ra1 = '0; spm_re1 = 1'b0; end
    // write port
    spm_we = 1'b1;
    if (ld_rsp) begin
      spm_wa = SAW'(m_rsp_tag); spm_wd = mrsp_data;
    end else if (vc_act && vu_ov) begin
      spm_wa = SAW'(vc.c + vc_w);
      spm_wd = '0;
      for (int l = 0; l < FP_PER_LINE; l++) spm_wd[32*l +: 32] = vu_o[l];
    end else if (rv_take) begin
      spm_wa = SAW'(rv.a + rv_n); spm_wd = rx_flit.data;
    end else if (ce_we) begin
      spm_wa = SAW'(ce_waddr); spm_wd = ce_wdata;
    end else begin
      spm_we = 1'b0; spm_wa = '0; spm_wd = '0;
    end
    // memory requests
    m_req_valid = 1'b1; m_req_write = 1'b0; m_req_wdata = '0; m_req_tag = '0;
    if (ld_req) begin
      m_req_addr = ld.daddr + CORE_LINE_AW'(ld_i);
      m_req_tag  = TAG_W'(ld.a + ld_i);
    end else if (st_act && st_have) begin
      m_req_addr = st.daddr + CORE_LINE_AW'(st_i);
      m_req_write = 1'b1; m_req_wdata = st_buf;
    end else if (sd_mreq) begin
      m_req_addr = sd.daddr + CORE_LINE_AW'(sd_i);
    end else if (ce_mreq_valid) begin
      m_req_addr = ce_mreq_addr;
    end else begin
      m_req_valid = 1'b0; m_req_addr = '0;
    end
    ce_mreq_ready = m_req_ready && !ld_req && !(st_act && st_have) && !sd_mreq;
    m_rsp_ready = ld_act || (sd_act && sd.sub[0] && sd_bready) || ce_mrsp_ready;
  end
endmodule
