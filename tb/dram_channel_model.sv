// dram_channel_model: behavioural model of one DRAM bank group (a bank on each
// of 4 stacked dies sharing 128 I/Os) for testbenches. Not synthesizable.
//
// It stores written lines sparsely, returns read bursts of 8 beats, beat b
// tCL + 2b cycles after RD, and checks the command timing of the controller:
// ACT to an open bank, RD/WR to a closed bank or before tRCD, PRE before tRAS,
// ACT before tRP or tRC, REF with a bank open. Each violation increments
// `violations`. Counters of ACT, PRE, RD, WR and REF commands are exported.
// Unwritten lines read back as a function of their address, so tests can
// predict them: beat b of line L is {L, b} repeated. The task `poke` lets a
// testbench preload a line and the function `peek` read one back.
module dram_channel_model
  import tasa_pkg::*;
(
  input  logic       clk,
  input  dram_req_t  req,
  output dram_rsp_t  rsp,
  output int         violations,
  output int         n_act, n_pre, n_rd, n_wr, n_ref
);
  logic [DRAM_IO-1:0] store [longint];
  bit   open_b [DRAM_DIES];
  logic [DRAM_ROW_AW-1:0] row_b [DRAM_DIES];
  longint t_act [DRAM_DIES];
  longint t_pre [DRAM_DIES];
  longint now = 0;
  // pending read beats: time -> data
  logic [DRAM_IO-1:0] rq [longint];
  int wbeats_left = 0;
  longint wline;

  function automatic logic [DRAM_IO-1:0] init_beat(longint line, int b);
    logic [31:0] w;
    w = {line[27:0], 4'(b)};
    return {4{w}};
  endfunction

  // testbench back door: set the contents of a channel line (die,row,col)
  task automatic poke(longint line, line_t data);
    for (int b = 0; b < DRAM_BURST; b++) store[line * 8 + b] = data[DRAM_IO*b +: DRAM_IO];
  endtask

  // testbench back door: read the contents of a channel line
  function automatic line_t peek(longint line);
    line_t l;
    for (int b = 0; b < DRAM_BURST; b++)
      l[DRAM_IO*b +: DRAM_IO] = store.exists(line * 8 + b) ? store[line * 8 + b] : init_beat(line, b);
    return l;
  endfunction

  initial begin
    violations = 0; n_act = 0; n_pre = 0; n_rd = 0; n_wr = 0; n_ref = 0;
    for (int d = 0; d < DRAM_DIES; d++) begin
      open_b[d] = 0; t_act[d] = -1000; t_pre[d] = -1000; row_b[d] = '0;
    end
    rsp = '0;
  end

  always @(posedge clk) begin
    longint line;
    int d;
    now++;
    rsp.rvalid <= 1'b0;
    if (rq.exists(now)) begin
      rsp.rvalid <= 1'b1;
      rsp.rdata  <= rq[now];
      rq.delete(now);
    end
    d = int'(req.die);
    line = longint'({req.die, req.row, req.col});
    if (req.wvalid && req.cmd != DCMD_WR) begin
      if (wbeats_left > 0) begin
        store[wline * 8 + (8 - wbeats_left)] = req.wdata;
        wbeats_left--;
      end else violations++;
    end
    unique case (req.cmd)
      DCMD_ACT: begin
        n_act++;
        if (open_b[d]) violations++;
        if (now - t_pre[d] < T_RP) violations++;
        if (now - t_act[d] < T_RC) violations++;
        open_b[d] = 1; row_b[d] = req.row; t_act[d] = now;
      end
      DCMD_PRE: begin
        n_pre++;
        if (open_b[d] && now - t_act[d] < T_RAS) violations++;
        open_b[d] = 0; t_pre[d] = now;
      end
      DCMD_RD: begin
        n_rd++;
        if (!open_b[d] || row_b[d] != req.row || now - t_act[d] < T_RCD) violations++;
        for (int b = 0; b < DRAM_BURST; b++)
          rq[now + T_CL + 2 * b] = store.exists(line * 8 + b) ? store[line * 8 + b] : init_beat(line, b);
      end
      DCMD_WR: begin
        n_wr++;
        if (!open_b[d] || row_b[d] != req.row || now - t_act[d] < T_RCD) violations++;
        if (!req.wvalid) violations++;
        store[line * 8] = req.wdata;
        wline = line;
        wbeats_left = DRAM_BURST - 1;
      end
      DCMD_REF: begin
        n_ref++;
        for (int k = 0; k < DRAM_DIES; k++) begin
          if (open_b[k]) violations++;
          if (now - t_pre[k] < T_RP) violations++;
        end
      end
      default: ;
    endcase
  end
endmodule
