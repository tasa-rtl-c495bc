// tb_mem_ctrl: memory controller against 16 behavioural DRAM channel models.
// Writes random lines to scattered addresses (row hits, row misses, all dies),
// reads them back and checks data, tags and that reads return in request
// order; reads a run of 256 consecutive
// lines and checks the streaming rate; checks the refresh interval for each
// temperature band and that refreshes happen; checks that no channel model saw
// a DRAM timing violation.
module tb_mem_ctrl;
  import tasa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int TAG_W = 12;
  logic [7:0] temp_c;
  logic req_valid, req_ready, req_write, rsp_valid, rsp_ready;
  logic [CORE_LINE_AW-1:0] req_addr;
  line_t req_wdata, rsp_data;
  logic [TAG_W-1:0] req_tag, rsp_tag;
  logic [4:0] wack;
  dram_req_t dram_o [DRAM_CH];
  dram_rsp_t dram_i [DRAM_CH];
  logic [15:0] ref_interval;
  logic [31:0] ref_count;

  mem_ctrl #(.TAG_W(TAG_W)) dut (.*);

  int viol [DRAM_CH];
  int n_act [DRAM_CH], n_pre [DRAM_CH], n_rd [DRAM_CH], n_wr [DRAM_CH], n_ref [DRAM_CH];
  for (genvar c = 0; c < DRAM_CH; c++) begin : g_m
    dram_channel_model u_m (.clk, .req(dram_o[c]), .rsp(dram_i[c]), .violations(viol[c]),
      .n_act(n_act[c]), .n_pre(n_pre[c]), .n_rd(n_rd[c]), .n_wr(n_wr[c]), .n_ref(n_ref[c]));
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected content of a line never written (see dram_channel_model)
  function automatic line_t init_line(logic [CORE_LINE_AW-1:0] a);
    line_t l;
    longint chl;
    chl = longint'(a >> 4);
    for (int b = 0; b < DRAM_BURST; b++) l[DRAM_IO*b +: DRAM_IO] = {4{chl[27:0], 4'(b)}};
    return l;
  endfunction

  line_t wdat [64];
  logic [CORE_LINE_AW-1:0] waddr [64];
  line_t exp_by_tag [4096];
  bit    pend [4096];
  int    n_wack = 0;
  always @(posedge clk) n_wack <= n_wack + int'(wack);

  task automatic send(logic w, logic [CORE_LINE_AW-1:0] a, line_t d, logic [TAG_W-1:0] t);
    req_valid = 1; req_write = w; req_addr = a; req_wdata = d; req_tag = t;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #0.5 req_valid = 0;
  endtask

  int got;
  int exp_tag_q [$];
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    checks++;
    if (exp_tag_q.size() == 0 || exp_tag_q.pop_front() != int'(rsp_tag)) begin
      failures++;
      if (failures < 10) $display("read tag %0d out of order", rsp_tag);
    end
    if (!pend[rsp_tag] || rsp_data !== exp_by_tag[rsp_tag]) begin
      failures++;
      if (failures < 10) $display("read tag %0d wrong data (pending %0d)", rsp_tag, pend[rsp_tag]);
    end
    pend[rsp_tag] = 0;
    got++;
  end

  initial begin
    int t0, t1;
    temp_c = 8'd60; req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0; req_tag = '0;
    rsp_ready = 1; got = 0;
    foreach (pend[i]) pend[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // refresh interval by temperature band (paper: 32/16/8/4 ms windows)
    begin
      logic [7:0] tv [8] = '{8'd25, 8'd85, 8'd86, 8'd95, 8'd96, 8'd105, 8'd106, 8'd120};
      int ev [8] = '{3906, 3906, 1953, 1953, 976, 976, 488, 488};
      for (int i = 0; i < 8; i++) begin
        temp_c = tv[i]; #0.5;
        checks++;
        if (int'(ref_interval) != ev[i]) begin failures++; $display("temp %0d interval %0d", tv[i], ref_interval); end
      end
    end
    temp_c = 8'd110;   // hot: refresh every 488 cycles

    // random writes
    for (int i = 0; i < 64; i++) begin
      waddr[i] = CORE_LINE_AW'($urandom);
      if (i % 4 == 1) waddr[i] = waddr[i-1] ^ 23'h10;      // same channel, other column: row hit
      if (i % 4 == 2) waddr[i] = waddr[i-1] ^ 23'h1000;    // same channel, other row: miss
      for (int j = 0; j < i; j++) if (waddr[j] == waddr[i]) waddr[i] = waddr[i] ^ 23'h2000;
      for (int k = 0; k < LINE_W / 32; k++) wdat[i][32*k +: 32] = $urandom;
      @(negedge clk);
      send(1, waddr[i], wdat[i], '0);
    end
    repeat (400) @(negedge clk);
    checks++;
    if (n_wack != 64) begin failures++; $display("write acks %0d", n_wack); end

    // read back in another order
    for (int i = 63; i >= 0; i--) begin
      exp_by_tag[i] = wdat[i]; pend[i] = 1; exp_tag_q.push_back(i);
      @(negedge clk);
      send(0, waddr[i], '0, TAG_W'(i));
    end
    repeat (600) @(negedge clk);
    checks++;
    if (got != 64) begin failures++; $display("reads returned %0d", got); end

    // streaming: 256 consecutive never-written lines
    temp_c = 8'd60;
    got = 0;
    @(negedge clk);
    t0 = cyc;
    for (int i = 0; i < 256; i++) begin
      logic [CORE_LINE_AW-1:0] a;
      a = CORE_LINE_AW'(23'h40000 + i);
      exp_by_tag[100 + i] = init_line(a); pend[100 + i] = 1; exp_tag_q.push_back(100 + i);
      send(0, a, '0, TAG_W'(100 + i));
    end
    while (got < 256) @(negedge clk);
    t1 = cyc;
    $display("256 lines streamed in %0d cycles (%0.2f lines/cycle)", t1 - t0, 256.0 / real'(t1 - t0));
    checks++;
    if (t1 - t0 > 320) begin failures++; $display("stream too slow"); end

    // no timing violations; refreshes happened
    for (int c = 0; c < DRAM_CH; c++) begin
      checks++;
      if (viol[c] != 0) begin failures++; $display("channel %0d: %0d timing violations", c, viol[c]); end
      checks++;
      if (n_ref[c] < 2) begin failures++; $display("channel %0d: %0d refreshes", c, n_ref[c]); end
    end
    checks++;
    if (int'(ref_count) != n_ref.sum()) begin failures++; $display("ref_count %0d", ref_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
