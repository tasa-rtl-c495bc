// sync_fifo: single-clock FIFO with valid/ready handshakes on both sides.
// DEPTH entries of WIDTH bits; a push and a pop may happen in the same cycle.
// Output data is the head entry (combinational from the storage array).
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   cnt;

  assign in_ready  = (int'(cnt) < DEPTH);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd];

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (push) wr <= (int'(wr) == DEPTH - 1) ? '0 : wr + 1'b1;
      if (pop)  rd <= (int'(rd) == DEPTH - 1) ? '0 : rd + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr] <= in_data;

  // a full FIFO must not be pushed
  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && in_ready && int'(cnt) > DEPTH - 1));
endmodule
