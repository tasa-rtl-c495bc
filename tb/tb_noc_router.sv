// tb_noc_router: a router placed at (1,1) of a 3x3 mesh. Every input port
// injects random flits whose destinations are legal for XY routing from that
// port; outputs apply random back-pressure. Each flit must leave exactly once
// on the port XY routing picks, flits of one input to one output must keep
// their order, and with no back-pressure a conflict-free pattern must move
// one flit per output per cycle.
module tb_noc_router;
  import tasa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int MX = 1, MY = 1;
  localparam int P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;
  logic [GX_W-1:0] my_x = GX_W'(MX);
  logic [GY_W-1:0] my_y = GY_W'(MY);
  logic  in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  flit_t in_flit [5], out_flit [5];

  noc_router #(.DEPTH(2)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int route(int x, int y);
    if (x > MX) return P_E;
    if (x < MX) return P_W;
    if (y > MY) return P_S;
    if (y < MY) return P_N;
    return P_L;
  endfunction

  // random destination that XY routing can legally bring in through port p
  function automatic flit_t mk(int p, int seq);
    flit_t f;
    int x, y;
    do begin
      x = $urandom % 3; y = $urandom % 3;
    end while ((p == P_W && x < MX) || (p == P_E && x > MX) ||
               (p == P_N && (x != MX || y < MY)) || (p == P_S && (x != MX || y > MY)) ||
               route(x, y) == p);
    f.hdr.dst_x = GX_W'(x); f.hdr.dst_y = GY_W'(y); f.hdr.dst_core = CID_W'($urandom);
    f.hdr.tag = 16'({4'(p), 12'(seq)});
    for (int k = 0; k < LINE_W / 32; k++) f.data[32*k +: 32] = $urandom;
    return f;
  endfunction

  flit_t sent [5][$];          // flits injected per input, for lookup
  int last_seq [5][5];         // last sequence number per (input, output)
  int n_in = 0, n_out = 0;
  int NF = 200;                // flits per input
  int seq [5];
  bit bp = 1;                  // random back-pressure and gaps

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 5; p++) begin
      if (in_valid[p] && in_ready[p]) begin n_in++; in_valid[p] <= 0; end
      if (out_valid[p] && out_ready[p]) begin
        int s, q;
        s = int'(out_flit[p].hdr.tag[15:12]); q = int'(out_flit[p].hdr.tag[11:0]);
        n_out++;
        checks++;
        if (s > 4 || route(int'(out_flit[p].hdr.dst_x), int'(out_flit[p].hdr.dst_y)) != p) begin
          failures++; if (failures < 10) $display("flit from %0d left on port %0d", s, p);
        end else begin
          checks++;
          if (q <= last_seq[s][p] || out_flit[p] !== sent[s][q]) begin
            failures++; if (failures < 10) $display("flit %0d from %0d on port %0d out of order or corrupted", q, s, p);
          end
          last_seq[s][p] = q;
        end
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < 5; p++) begin
      if (!in_valid[p] && seq[p] < NF && (!bp || $urandom % 2 == 0)) begin
        in_flit[p] = mk(p, seq[p]); sent[p].push_back(in_flit[p]); seq[p]++; in_valid[p] = 1;
      end
      out_ready[p] = !bp || ($urandom % 3 != 0);
    end
  end

  initial begin
    int t0, n0;
    foreach (in_valid[p]) begin in_valid[p] = 0; out_ready[p] = 0; in_flit[p] = '0; seq[p] = 0; end
    foreach (last_seq[s, p]) last_seq[s][p] = -1;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (n_out == 5 * NF);
    repeat (5) @(negedge clk);
    checks++;
    if (n_in != 5 * NF || n_out != 5 * NF) begin failures++; $display("in %0d out %0d", n_in, n_out); end
    // throughput: each input sends to the next port only (a permutation), no back-pressure
    bp = 0; NF = 0;
    @(negedge clk);
    n0 = n_out; t0 = $time;
    for (int i = 0; i < 100; i++) begin
      for (int p = 0; p < 5; p++) begin
        flit_t f;
        int d;
        // L->E, W->S... pick a legal distinct output per input
        d = (p == P_L) ? P_E : (p == P_W) ? P_S : (p == P_N) ? P_L : (p == P_E) ? P_W : P_N;
        f = '0;
        unique case (d)
          P_E: begin f.hdr.dst_x = 2; f.hdr.dst_y = 1; end
          P_S: begin f.hdr.dst_x = 1; f.hdr.dst_y = 2; end
          P_L: begin f.hdr.dst_x = 1; f.hdr.dst_y = 1; end
          P_W: begin f.hdr.dst_x = 0; f.hdr.dst_y = 1; end
          default: begin f.hdr.dst_x = 1; f.hdr.dst_y = 0; end
        endcase
        f.hdr.tag = 16'({4'(p), 12'(sent[p].size())});
        sent[p].push_back(f);
        in_flit[p] = f; in_valid[p] = 1;
      end
      @(posedge clk);
      while (!(in_ready[0] && in_ready[1] && in_ready[2] && in_ready[3] && in_ready[4])) begin
        @(posedge clk);
      end
      @(negedge clk);
    end
    foreach (in_valid[p]) in_valid[p] = 0;
    wait (n_out == n0 + 500);
    checks++;
    if (($time - t0) / 2 > 100 + 6) begin failures++; $display("500 flits took %0d cycles", ($time - t0) / 2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
