// mem_ctrl: memory controller of one core for its 16 local DRAM bank groups.
//
// Each core sits under 16 bank groups (channels) of the DRAM stack and owns
// them alone, so the controller needs no arbitration with other cores. Line
// addresses are interleaved over the channels (address bits [3:0] pick the
// channel), so a run of consecutive lines keeps all 16 channels busy; their
// 16 x 128 I/Os at 500 MHz give 128 bytes per 1 GHz cycle, one line per cycle.
// Above a channel address, bits [3:0] are the column (line within a 2 KB row),
// [16:4] the row and [18:17] the die.
//
// Requests (line address, write flag, data, tag) go to the addressed channel;
// `req_ready` reflects that channel and a free slot in the order queue. Read
// responses come back in request order, one per cycle, each with its tag: an
// order queue remembers which channel each read went to, and only the channel
// at its head may hand over a line. Each channel answers in its own order, so
// this restores the global order without a reorder buffer. `wack` counts write
// completions in the current cycle.
//
// Refresh follows the die temperature, as in the paper's refresh table: a
// 32 ms retention window up to 85 C, 16 ms up to 95 C, 8 ms up to 105 C and
// 4 ms above (also used beyond 115 C). With one REF per row (8192 rows) this is
// an interval of 3906, 1953, 976 or 488 cycles at 1 GHz.
module mem_ctrl
  import tasa_pkg::*;
#(
  parameter int TAG_W = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [7:0]               temp_c,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic                     req_write,
  input  logic [CORE_LINE_AW-1:0]  req_addr,
  input  line_t                    req_wdata,
  input  logic [TAG_W-1:0]         req_tag,
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output line_t                    rsp_data,
  output logic [TAG_W-1:0]         rsp_tag,
  output logic [4:0]               wack,
  output dram_req_t                dram_o [DRAM_CH],
  input  dram_rsp_t                dram_i [DRAM_CH],
  output logic [15:0]              ref_interval,
  output logic [31:0]              ref_count     // REF commands issued, summed over channels
);
  localparam int CW = $clog2(DRAM_CH);

  always_comb begin
    if (temp_c <= 8'd85)       ref_interval = 16'(32_000_000 / REF_PER_WINDOW);
    else if (temp_c <= 8'd95)  ref_interval = 16'(16_000_000 / REF_PER_WINDOW);
    else if (temp_c <= 8'd105) ref_interval = 16'(8_000_000 / REF_PER_WINDOW);
    else                       ref_interval = 16'(4_000_000 / REF_PER_WINDOW);
  end

  logic [CW-1:0] sel;
  assign sel = req_addr[CW-1:0];
  logic ord_valid, ord_ready;

  logic             ch_req_valid [DRAM_CH];
  logic             ch_req_ready [DRAM_CH];
  logic             ch_rsp_valid [DRAM_CH];
  logic             ch_rsp_ready [DRAM_CH];
  line_t            ch_rsp_data  [DRAM_CH];
  logic [TAG_W-1:0] ch_rsp_tag   [DRAM_CH];
  logic             ch_wack      [DRAM_CH];
  logic [31:0]      ch_refs      [DRAM_CH];

  for (genvar c = 0; c < DRAM_CH; c++) begin : g_ch
    assign ch_req_valid[c] = req_valid && (sel == CW'(c)) && (req_write || ord_ready);
    dram_channel_ctrl #(.TAG_W(TAG_W)) u_ch (
      .clk, .rst_n,
      .ref_interval,
      .req_valid (ch_req_valid[c]),
      .req_ready (ch_req_ready[c]),
      .req_write,
      .req_addr  (req_addr[CORE_LINE_AW-1:CW]),
      .req_wdata,
      .req_tag,
      .rsp_valid (ch_rsp_valid[c]),
      .rsp_ready (ch_rsp_ready[c]),
      .rsp_data  (ch_rsp_data[c]),
      .rsp_tag   (ch_rsp_tag[c]),
      .wack      (ch_wack[c]),
      .dram_o    (dram_o[c]),
      .dram_i    (dram_i[c]),
      .ref_count (ch_refs[c])
    );
  end

  assign req_ready = ch_req_ready[sel] && (req_write || ord_ready);

  // every channel sees the same interval from reset, so channel 0 stands for all
  logic [31:0] refs_sum;
  always_comb begin
    refs_sum = '0;
    for (int c = 0; c < DRAM_CH; c++) refs_sum = refs_sum + ch_refs[c];
  end
  assign ref_count = refs_sum;

  // in-order merge of read responses
  localparam int ORD_DEPTH = 32;

  logic [CW-1:0] ord_head;
  logic          req_fire_rd, rsp_fire;
  assign req_fire_rd = req_valid && req_ready && !req_write;
  assign rsp_fire    = rsp_valid && rsp_ready;
  sync_fifo #(.WIDTH(CW), .DEPTH(ORD_DEPTH)) u_order (
    .clk, .rst_n,
    .in_valid(req_fire_rd), .in_ready(ord_ready), .in_data(sel),
    .out_valid(ord_valid), .out_ready(rsp_fire), .out_data(ord_head));

  always_comb begin
    for (int c = 0; c < DRAM_CH; c++) ch_rsp_ready[c] = ord_valid && rsp_ready && (ord_head == CW'(c));
    rsp_valid = ord_valid && ch_rsp_valid[ord_head];
    rsp_data  = ch_rsp_data[ord_head];
    rsp_tag   = ch_rsp_tag[ord_head];
  end

  always_comb begin
    wack = '0;
    for (int c = 0; c < DRAM_CH; c++) wack = wack + 5'(ch_wack[c]);
  end
endmodule
