// dram_channel_ctrl: command scheduler for one DRAM bank group (channel).
//
// A channel is a column of four banks, one on each stacked DRAM die, sharing
// 128 data I/Os that run at 500 MHz (one beat every two 1 GHz core cycles). A
// 128-byte line is a burst of 8 beats, so the data bus carries one line per
// 16 core cycles. Requests wait in a small queue. The scheduler keeps one row
// open per die (open-row policy): a row hit issues its column command as soon
// as the previous burst has left the bus; a miss precharges (after tRAS),
// activates (after tRP) and waits tRCD first. Reads are pipelined: the next
// column command may go out while the previous burst's beats still arrive; the
// beats are collected in order and the finished line leaves through a two-entry
// response queue with its tag. Writes drive 8 beats, the first with the WR
// command, and pulse `wack` with the last.
//
// Refresh: a counter raises a refresh request every `ref_interval` cycles; at
// the next point where no burst is in flight the controller precharges the open
// rows and issues REF, which refreshes the channel on all dies, then waits tRFC.
// mem_ctrl derives the interval from the die temperature.
//
// Timing (core cycles): tRCD 17, tCL 2, tRAS 34, tRP 12, tRC 46 from the
// paper's table rounded up to 1 ns; tRFC and the burst format are this
// design's own. Read data beat b is expected tCL + 2b cycles after RD.
module dram_channel_ctrl
  import tasa_pkg::*;
#(
  parameter int TAG_W = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            ref_interval,
  // request
  input  logic                   req_valid,
  output logic                   req_ready,
  input  logic                   req_write,
  input  logic [CH_LINE_AW-1:0]  req_addr,
  input  line_t                  req_wdata,
  input  logic [TAG_W-1:0]       req_tag,
  // read response
  output logic                   rsp_valid,
  input  logic                   rsp_ready,
  output line_t                  rsp_data,
  output logic [TAG_W-1:0]       rsp_tag,
  output logic                   wack,
  // DRAM
  output dram_req_t              dram_o,
  input  dram_rsp_t              dram_i,
  output logic [31:0]            ref_count
);
  typedef struct packed {
    logic                  write;
    logic [CH_LINE_AW-1:0] addr;
    line_t                 data;
    logic [TAG_W-1:0]      tag;
  } creq_t;
  typedef struct packed {
    line_t            data;
    logic [TAG_W-1:0] tag;
  } crsp_t;

  typedef enum logic [2:0] {
    S_IDLE, S_MISS, S_ACT, S_ACT_WAIT, S_COL, S_REF_PRE, S_REF, S_REF_WAIT
  } state_e;
  state_e state;

  // request queue
  creq_t q_in, q_head, cur;
  logic  q_valid, q_pop;
  assign q_in = '{write: req_write, addr: req_addr, data: req_wdata, tag: req_tag};
  sync_fifo #(.WIDTH($bits(creq_t)), .DEPTH(2)) u_reqq (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_data(q_in),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_head));

  // response queue
  crsp_t r_in, r_out;
  logic  r_push, r_full_n;
  logic [1:0] r_cnt;
  sync_fifo #(.WIDTH($bits(crsp_t)), .DEPTH(2)) u_rspq (
    .clk, .rst_n,
    .in_valid(r_push), .in_ready(r_full_n), .in_data(r_in),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(r_out));
  assign rsp_data = r_out.data;
  assign rsp_tag  = r_out.tag;

  // bank state per die
  logic                   open_q [DRAM_DIES];
  logic [DRAM_ROW_AW-1:0] row_q  [DRAM_DIES];
  logic [7:0]             ras_q  [DRAM_DIES];   // cycles since ACT, saturating

  logic [7:0]  wait_q;      // command timer (tRP, tRCD, tRFC)
  logic [4:0]  bus_q;       // cycles until the data bus is free
  logic [15:0] ref_cnt;
  logic        ref_due;

  // read collection
  logic [TAG_W-1:0] rtag [2];
  logic [1:0]  rd_out;      // reads issued whose line is not yet queued
  logic [3:0]  rbeat;
  line_t       rline;

  // write beats
  line_t       wline;
  logic [3:0]  wbeat;       // beats still to send
  logic        wtick;

  // split of a channel line address
  function automatic logic [DRAM_DIE_AW-1:0] a_die(logic [CH_LINE_AW-1:0] a);
    return a[DRAM_COL_AW + DRAM_ROW_AW +: DRAM_DIE_AW];
  endfunction
  function automatic logic [DRAM_ROW_AW-1:0] a_row(logic [CH_LINE_AW-1:0] a);
    return a[DRAM_COL_AW +: DRAM_ROW_AW];
  endfunction

  logic head_hit, col_ok;
  assign head_hit = open_q[a_die(q_head.addr)] && row_q[a_die(q_head.addr)] == a_row(q_head.addr);
  // a read needs room for its line: lines in flight plus queued lines below 2
  assign col_ok = (bus_q == 0) && (wbeat == 0) &&
                  (q_head.write || (int'(rd_out) + int'(r_cnt) < 2));

  logic issue_hit;
  assign issue_hit = (state == S_IDLE) && !ref_due && q_valid && head_hit && col_ok;
  assign q_pop = issue_hit || ((state == S_IDLE) && !ref_due && q_valid && !head_hit);

  logic any_open;
  logic [DRAM_DIE_AW-1:0] open_die;
  always_comb begin
    any_open = 1'b0;
    open_die = '0;
    for (int d = DRAM_DIES - 1; d >= 0; d--)
      if (open_q[d]) begin any_open = 1'b1; open_die = DRAM_DIE_AW'(d); end
  end

  // column command for request c
  task automatic issue_col(input creq_t c);
    dram_o.die <= a_die(c.addr);
    dram_o.row <= a_row(c.addr);
    dram_o.col <= c.addr[DRAM_COL_AW-1:0];
    bus_q <= 5'(2 * DRAM_BURST - 1);
    if (c.write) begin
      dram_o.cmd    <= DCMD_WR;
      dram_o.wvalid <= 1'b1;
      dram_o.wdata  <= c.data[0 +: DRAM_IO];
      wline <= c.data;
      wbeat <= 4'(DRAM_BURST - 1);
      wtick <= 1'b0;
    end else begin
      dram_o.cmd <= DCMD_RD;
    end
  endtask

  logic [TAG_W-1:0] new_tag;
  assign new_tag = issue_hit ? q_head.tag : cur.tag;
  logic rd_issue;
  always_comb rd_issue = (issue_hit && !q_head.write) || (state == S_COL && col_ok && !cur.write);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      dram_o <= '0;
      cur <= '0;
      wait_q <= '0; bus_q <= '0;
      ref_cnt <= '0; ref_due <= 1'b0; ref_count <= '0;
      wack <= 1'b0;
      rtag[0] <= '0; rtag[1] <= '0;
      rd_out <= '0; rbeat <= '0; rline <= '0;
      wline <= '0; wbeat <= '0; wtick <= 1'b0;
      for (int d = 0; d < DRAM_DIES; d++) begin
        open_q[d] <= 1'b0; row_q[d] <= '0; ras_q[d] <= '0;
      end
    end else begin
      dram_o.cmd    <= DCMD_NOP;
      dram_o.wvalid <= 1'b0;
      wack <= 1'b0;
      for (int d = 0; d < DRAM_DIES; d++)
        if (ras_q[d] != 8'hFF) ras_q[d] <= ras_q[d] + 1'b1;
      if (wait_q != 0) wait_q <= wait_q - 1'b1;
      if (bus_q != 0)  bus_q <= bus_q - 1'b1;

      if (ref_cnt >= ref_interval - 1) begin
        ref_cnt <= '0;
        ref_due <= 1'b1;
      end else begin
        ref_cnt <= ref_cnt + 1'b1;
      end

      // write beats, one per two cycles
      if (wbeat != 0) begin
        wtick <= ~wtick;
        if (wtick) begin
          dram_o.wvalid <= 1'b1;
          dram_o.wdata  <= wline[DRAM_IO * (DRAM_BURST - int'(wbeat)) +: DRAM_IO];
          wbeat <= wbeat - 1'b1;
          if (wbeat == 4'd1) wack <= 1'b1;
        end
      end

      // read beat collection (in order)
      if (dram_i.rvalid) begin
        rline[DRAM_IO*rbeat +: DRAM_IO] <= dram_i.rdata;
        rbeat <= (int'(rbeat) == DRAM_BURST - 1) ? '0 : rbeat + 1'b1;
      end
      // tags of reads in flight, oldest first
      if (rd_issue && !r_push) begin
        rtag[rd_out[0]] <= new_tag;
      end else if (!rd_issue && r_push) begin
        rtag[0] <= rtag[1];
      end else if (rd_issue && r_push) begin
        if (rd_out == 2'd1) rtag[0] <= new_tag;
        else begin rtag[0] <= rtag[1]; rtag[1] <= new_tag; end
      end
      rd_out <= rd_out + 2'(rd_issue) - 2'(r_push);

      unique case (state)
        S_IDLE: begin
          if (ref_due) begin
            if (rd_out == 0 && wbeat == 0) state <= S_REF_PRE;
          end else if (q_valid) begin
            if (head_hit) begin
              if (col_ok) issue_col(q_head);
            end else begin
              cur   <= q_head;
              state <= S_MISS;
            end
          end
        end
        S_MISS: begin
          if (open_q[a_die(cur.addr)]) begin
            if (wait_q == 0 && wbeat == 0 && int'(ras_q[a_die(cur.addr)]) >= T_RAS) begin
              dram_o.cmd <= DCMD_PRE;
              dram_o.die <= a_die(cur.addr);
              open_q[a_die(cur.addr)] <= 1'b0;
              wait_q <= 8'(T_RP - 1);
              state  <= S_ACT;
            end
          end else begin
            state <= S_ACT;
          end
        end
        S_ACT: begin
          if (wait_q == 0) begin
            dram_o.cmd <= DCMD_ACT;
            dram_o.die <= a_die(cur.addr);
            dram_o.row <= a_row(cur.addr);
            open_q[a_die(cur.addr)] <= 1'b1;
            row_q[a_die(cur.addr)]  <= a_row(cur.addr);
            ras_q[a_die(cur.addr)]  <= '0;
            wait_q <= 8'(T_RCD - 1);
            state  <= S_ACT_WAIT;
          end
        end
        S_ACT_WAIT: if (wait_q == 0) state <= S_COL;
        S_COL: begin
          if (col_ok) begin
            issue_col(cur);
            state <= S_IDLE;
          end
        end
        S_REF_PRE: begin
          if (any_open) begin
            if (wait_q == 0 && int'(ras_q[open_die]) >= T_RAS) begin
              dram_o.cmd <= DCMD_PRE;
              dram_o.die <= open_die;
              open_q[open_die] <= 1'b0;
              wait_q <= 8'(T_RP - 1);
            end
          end else begin
            state <= S_REF;
          end
        end
        S_REF: begin
          if (wait_q == 0) begin
            dram_o.cmd <= DCMD_REF;
            wait_q <= 8'(T_RFC - 1);
            ref_count <= ref_count + 1;
            ref_due <= 1'b0;
            state <= S_REF_WAIT;
          end
        end
        S_REF_WAIT: if (wait_q == 0) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a line is complete when its last beat arrives
  assign r_push = dram_i.rvalid && (int'(rbeat) == DRAM_BURST - 1);
  always_comb begin
    r_in.data = rline;
    r_in.data[DRAM_IO*(DRAM_BURST-1) +: DRAM_IO] = dram_i.rdata;
    r_in.tag  = rtag[0];
  end

  // response queue occupancy
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_cnt <= '0;
    else r_cnt <= r_cnt + 2'(r_push) - 2'(rsp_valid && rsp_ready);
  end

  assert property (@(posedge clk) disable iff (!rst_n) r_push |-> r_full_n);
endmodule
