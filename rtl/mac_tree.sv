// mac_tree: one multiply-accumulate tree of the E-core (32 x 1 in Tasa).
//
// N multipliers form the products of the weight register and the input
// register (bf16 x bf16, exact in fp32); a binary adder tree of log2(N) levels
// sums them and the accumulator adds the sum to its running value. The
// accumulator feeds back through its register, as in the paper's drawing.
//
// Interface: `clear` zeroes the accumulator. When `step` is high the
// accumulator takes acc + dot(w, x) at the clock edge (one dot product per
// cycle, multiply and tree in one cycle). `acc` is the register output.
// `clear` and `step` together start a new sum with this step's product.
//
// From the paper: N = 32, multipliers, adder tree, accumulator and register.
// Own choices: single-cycle tree, fp32 adders, truncating arithmetic.
module mac_tree
  import tasa_pkg::*;
#(
  parameter int N = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  step,
  input  bf16_t w [N],
  input  bf16_t x [N],
  output fp32_t acc
);

  localparam int LEVELS = $clog2(N);
  localparam int NP = 1 << LEVELS;

  fp32_t lvl [LEVELS+1][NP];
  fp32_t sum;

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < NP; i++) lvl[l][i] = '0;
    for (int i = 0; i < N; i++) lvl[0][i] = bf16_mul(w[i], x[i]);
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (NP >> l); i++)
        lvl[l][i] = fp32_add(lvl[l-1][2*i], lvl[l-1][2*i+1]);
    sum = lvl[LEVELS][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (step)    acc <= fp32_add(clear ? 32'd0 : acc, sum);
    else if (clear)   acc <= '0;
  end

endmodule
