// systolic_array: output-stationary GEMM array of the P-core.
//
// ROWS x COLS processing elements (32 x 32 in Tasa) each hold one fp32
// accumulator. Each cycle the array takes one weight column W[0..ROWS-1][k]
// from the weight buffer on the left and one input row X[k][0..COLS-1] from the
// input buffer on top. Weights move right, inputs move down, one PE per cycle;
// the two buffers skew their lanes (row i waits i cycles, column j waits j
// cycles) so that W[i][k] and X[k][j] meet in PE(i,j). After K such steps
// PE(i,j) holds C[i][j] = sum_k W[i][k] * X[k][j] (bf16 products, fp32 sums).
//
// Interface: pulse `start` to clear the accumulators, then present K steps on
// `in_valid` (any gaps allowed) with `in_last` on the final one. The array
// copies all accumulators into the output buffer ROWS+COLS-1 cycles after the
// last step entered and raises `done` for one cycle with it, so `done` is
// seen ROWS+COLS cycles after the cycle of the last step; rows are then read through `out_addr`/`out_row` (combinational read) until the next
// `start`. `busy` is high from `start` until `done`.
//
// From the paper: the 32x32 size, the PE grid fed by input buffer (top) and
// weight buffer (left) with an output buffer, GEMM on bf16 data. This design's
// own choices: output-stationary dataflow, skew registers as the buffers,
// parallel copy into the output buffer.
module systolic_array
  import tasa_pkg::*;
#(
  parameter int ROWS = 32,
  parameter int COLS = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  input  logic        in_last,
  input  bf16_t       w_col [ROWS],
  input  bf16_t       x_row [COLS],
  output logic        busy,
  output logic        done,
  input  logic [$clog2(ROWS)-1:0] out_addr,
  output fp32_t       out_row [COLS]
);

  localparam int DRAIN = ROWS + COLS - 1;

  // skewing buffers
  bf16_t w_sk  [ROWS][ROWS];   // w_sk[i][d]: row i delayed d+1 cycles
  logic  v_sk  [ROWS][ROWS];
  bf16_t x_sk  [COLS][COLS];

  bf16_t w_in  [ROWS];
  logic  v_in  [ROWS];
  bf16_t x_in  [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int d = 0; d < ROWS; d++) begin
          w_sk[i][d] <= '0;
          v_sk[i][d] <= 1'b0;
        end
      for (int j = 0; j < COLS; j++)
        for (int d = 0; d < COLS; d++) x_sk[j][d] <= '0;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        w_sk[i][0] <= w_col[i];
        v_sk[i][0] <= in_valid;
        for (int d = 1; d < ROWS; d++) begin
          w_sk[i][d] <= w_sk[i][d-1];
          v_sk[i][d] <= v_sk[i][d-1];
        end
      end
      for (int j = 0; j < COLS; j++) begin
        x_sk[j][0] <= x_row[j];
        for (int d = 1; d < COLS; d++) x_sk[j][d] <= x_sk[j][d-1];
      end
    end
  end

  always_comb begin
    w_in[0] = w_col[0];
    v_in[0] = in_valid;
    for (int i = 1; i < ROWS; i++) begin
      w_in[i] = w_sk[i][i-1];
      v_in[i] = v_sk[i][i-1];
    end
    x_in[0] = x_row[0];
    for (int j = 1; j < COLS; j++) x_in[j] = x_sk[j][j-1];
  end

  // PE grid
  bf16_t pe_w [ROWS][COLS];
  bf16_t pe_x [ROWS][COLS];
  logic  pe_v [ROWS][COLS];
  fp32_t acc  [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          pe_w[i][j] <= '0;
          pe_x[i][j] <= '0;
          pe_v[i][j] <= 1'b0;
          acc[i][j]  <= '0;
        end
    end else begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          bf16_t w, x;
          logic  v;
          w = (j == 0) ? w_in[i] : pe_w[i][j-1];
          v = (j == 0) ? v_in[i] : pe_v[i][j-1];
          x = (i == 0) ? x_in[j] : pe_x[i-1][j];
          pe_w[i][j] <= w;
          pe_v[i][j] <= v;
          pe_x[i][j] <= x;
          if (start)  acc[i][j] <= '0;
          else if (v) acc[i][j] <= fp32_add(acc[i][j], bf16_mul(w, x));
        end
    end
  end

  // drain control and output buffer
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;
  logic draining;
  fp32_t obuf [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_cnt <= '0;
      draining  <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) obuf[i][j] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        draining <= 1'b0;
      end else if (in_valid && in_last) begin
        draining  <= 1'b1;
        drain_cnt <= '0;
      end else if (draining) begin
        if (int'(drain_cnt) == DRAIN - 1) begin
          draining <= 1'b0;
          busy     <= 1'b0;
          done     <= 1'b1;
          for (int i = 0; i < ROWS; i++)
            for (int j = 0; j < COLS; j++) obuf[i][j] <= acc[i][j];
        end
        drain_cnt <= drain_cnt + 1'b1;
      end
    end
  end

  always_comb
    for (int j = 0; j < COLS; j++) out_row[j] = obuf[out_addr][j];

endmodule
