// tasa_pkg: types, sizes and arithmetic shared by the Tasa logic-die RTL.
//
// Sizes follow the paper's hardware table: 128-byte NoC flits, 128 KB of
// scratchpad per core, 16 DRAM bank groups per core with 128 I/Os each at
// 500 MHz, 32x32 systolic arrays, 12 MAC trees of 32 inputs and 32-lane
// vector units, base clock 1 GHz. Everything moves in 128-byte lines, which is
// one flit and one scratchpad word.
//
// Number format: the workloads run in FP16/BF16. This design uses bfloat16
// operands and IEEE-754 single-precision accumulation. The arithmetic below is
// a reduced IEEE subset chosen for this design: subnormals flush to zero,
// results are truncated (round toward zero), overflow gives infinity, and
// NaN inputs are not treated specially.
package tasa_pkg;

  localparam int LINE_BYTES = 128;                 // NoC flit width
  localparam int LINE_W     = LINE_BYTES * 8;      // 1024 bits
  localparam int BF_PER_LINE = LINE_W / 16;        // 64 bf16 elements
  localparam int FP_PER_LINE = LINE_W / 32;        // 32 fp32 elements

  localparam int SPM_LINES  = 128 * 1024 / LINE_BYTES;  // 1024 lines = 128 KB
  localparam int SPM_AW     = $clog2(SPM_LINES);

  // DRAM organisation seen from one core: 16 bank groups (channels), each a
  // stack of one bank on each of the 4 DRAM dies sharing 128 I/Os.
  localparam int DRAM_CH      = 16;
  localparam int DRAM_DIES    = 4;
  localparam int DRAM_IO      = 128;
  localparam int DRAM_BURST   = LINE_W / DRAM_IO;  // 8 beats per 128-byte line
  localparam int DRAM_ROW_AW  = 13;                // 8192 rows
  localparam int DRAM_COL_AW  = 4;                 // 16 lines (2 KB) per row
  localparam int DRAM_DIE_AW  = 2;
  localparam int CH_LINE_AW   = DRAM_DIE_AW + DRAM_ROW_AW + DRAM_COL_AW;  // 64 MB per channel
  localparam int CORE_LINE_AW = $clog2(DRAM_CH) + CH_LINE_AW;            // 1 GB per core

  // DRAM timing in 1 GHz core cycles, rounded up from the paper's table.
  localparam int T_RCD = 17;   // 16.4 ns
  localparam int T_CL  = 2;    // 1.7 ns
  localparam int T_RAS = 34;   // 33.6 ns
  localparam int T_RP  = 12;   // 11.7 ns
  localparam int T_RC  = 46;   // 45.3 ns
  localparam int T_RFC = 46;   // not given; one row cycle assumed
  localparam int REF_PER_WINDOW = 8192;  // refresh commands per retention window (one per row)

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;
  typedef logic [LINE_W-1:0] line_t;

  typedef enum logic [2:0] {
    DCMD_NOP = 3'd0, DCMD_ACT = 3'd1, DCMD_RD = 3'd2, DCMD_WR = 3'd3,
    DCMD_PRE = 3'd4, DCMD_REF = 3'd5
  } dram_cmd_e;

  // One DRAM channel (bank group) as driven by the memory controller.
  typedef struct packed {
    dram_cmd_e                cmd;
    logic [DRAM_DIE_AW-1:0]   die;
    logic [DRAM_ROW_AW-1:0]   row;
    logic [DRAM_COL_AW-1:0]   col;
    logic                     wvalid;
    logic [DRAM_IO-1:0]       wdata;
  } dram_req_t;

  typedef struct packed {
    logic                     rvalid;
    logic [DRAM_IO-1:0]       rdata;
  } dram_rsp_t;

  // NoC flit: one 128-byte line plus a routing header. Single-flit packets.
  localparam int GX_W = 3;     // up to 8 core groups per mesh row
  localparam int GY_W = 3;
  localparam int CID_W = 3;    // core in group: 0 = E-core, 1.. = P-cores
  typedef struct packed {
    logic [GX_W-1:0]  dst_x;
    logic [GY_W-1:0]  dst_y;
    logic [CID_W-1:0] dst_core;
    logic [15:0]      tag;      // free for software (e.g. sequence number)
  } flit_hdr_t;
  typedef struct packed {
    flit_hdr_t hdr;
    line_t     data;
  } flit_t;
  localparam int FLIT_W = $bits(flit_t);

  // ---------------------------------------------------------------------
  // Core instruction (96 bits, 3-bit opcode). The paper gives no ISA; this one is the
  // design's own: one instruction per unit-level operation.
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_LOAD  = 3'd1,  // DRAM lines daddr.. -> scratchpad a..
    OP_STORE = 3'd2,  // scratchpad lines a.. -> DRAM daddr..
    OP_GEMM  = 3'd3,  // P-core: systolic arrays, operands a.. and b.., results c..
    OP_GEMV  = 3'd4,  // E-core: MAC trees, inputs a.., weights b../daddr../link, result c
    OP_VEC   = 3'd5,  // vector unit: c[i] = a[i] (sub) b[i]
    OP_SEND  = 3'd6,  // scratchpad a.. (sub 0) or DRAM daddr.. (sub 1) -> NoC to dst
    OP_RECV  = 3'd7   // NoC lines -> scratchpad a..
  } opcode_e;
  localparam int N_OPS = 8;

  typedef struct packed {
    opcode_e      op;
    logic [3:0]   sub;      // unit sub-operation / source select
    logic         sync;     // wait until every running operation has finished
    logic [9:0]   a;        // scratchpad address A
    logic [9:0]   b;        // scratchpad address B
    logic [9:0]   c;        // scratchpad address C (results)
    logic [9:0]   len;      // number of lines / steps
    logic [22:0]  daddr;    // DRAM line address (core-local)
    logic [GX_W-1:0]  dst_x;  // NoC destination for SEND
    logic [GY_W-1:0]  dst_y;
    logic [CID_W-1:0] dst_core;
    logic [15:0]  rsv;
  } instr_t;

  // Resources an operation occupies; operations run concurrently when their
  // resource sets do not intersect.
  typedef enum logic [2:0] {
    RES_SPM_R = 3'd0, RES_SPM_W = 3'd1, RES_MEM = 3'd2, RES_TX = 3'd3, RES_RX = 3'd4
  } res_e;
  localparam int N_RES = 5;

  // sub field of OP_VEC
  typedef enum logic [2:0] {
    VOP_ADD = 3'd0, VOP_SUB = 3'd1, VOP_MUL = 3'd2, VOP_MAX = 3'd3,
    VOP_RELU = 3'd4, VOP_COPY = 3'd5
  } vec_op_e;

  // sub field of OP_GEMV: where the weight lines come from
  typedef enum logic [1:0] {
    WSRC_SPM = 2'd0, WSRC_DRAM = 2'd1, WSRC_COMM = 2'd2
  } wsrc_e;

  // ---------------------------------------------------------------------
  // Floating point helpers.
  function automatic fp32_t bf16_to_fp32(bf16_t a);
    return {a, 16'h0};
  endfunction

  function automatic bf16_t fp32_to_bf16(fp32_t a);
    return a[31:16];   // truncation
  endfunction

  // bf16 x bf16 -> fp32. The 8x8-bit significand product is exact in fp32.
  function automatic fp32_t bf16_mul(bf16_t a, bf16_t b);
    logic        s;
    logic [15:0] p;
    logic signed [10:0] e;
    logic [22:0] m;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 31'd0};
    if (a[14:7] == 8'hFF || b[14:7] == 8'hFF) return {s, 8'hFF, 23'd0};
    p = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = $signed({3'b0, a[14:7]}) + $signed({3'b0, b[14:7]}) - 11'sd127;
    if (p[15]) begin
      e = e + 11'sd1;
      m = {p[14:0], 8'd0};
    end else begin
      m = {p[13:0], 9'd0};
    end
    if (e <= 0) return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, e[7:0], m};
  endfunction

  // fp32 x fp32 -> fp32 (truncating).
  function automatic fp32_t fp32_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [22:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({3'b0, a[30:23]}) + $signed({3'b0, b[30:23]}) - 11'sd127;
    if (p[47]) begin
      e = e + 11'sd1;
      m = p[46:24];
    end else begin
      m = p[45:23];
    end
    if (e <= 0) return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, e[7:0], m};
  endfunction

  // fp32 + fp32 -> fp32 (truncating, three guard bits during alignment).
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t bgr, sml;
    logic [7:0]  d;
    logic [26:0] mb, ms;       // 1.23 significand with 3 guard bits
    logic [27:0] sum;
    logic signed [10:0] e;
    int lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:0] >= b[30:0]) begin bgr = a; sml = b; end
    else begin bgr = b; sml = a; end
    d  = bgr[30:23] - sml[30:23];
    mb = {1'b1, bgr[22:0], 3'b000};
    ms = (d > 8'd26) ? 27'd0 : ({1'b1, sml[22:0], 3'b000} >> d);
    e  = $signed({3'b0, bgr[30:23]});
    if (bgr[31] == sml[31]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[27]) begin
        sum = sum >> 1;
        e = e + 11'sd1;
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, ms};
      if (sum == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - 11'(lz);
    end
    if (e <= 0) return 32'd0;
    if (e >= 255) return {bgr[31], 8'hFF, 23'd0};
    return {bgr[31], e[7:0], sum[25:3]};
  endfunction

  function automatic fp32_t fp32_max(fp32_t a, fp32_t b);
    logic a_gt;
    if (a[31] != b[31]) a_gt = b[31];
    else if (!a[31])    a_gt = (a[30:0] > b[30:0]);
    else                a_gt = (a[30:0] < b[30:0]);
    return a_gt ? a : b;
  endfunction

endpackage
