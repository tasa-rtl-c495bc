// vector_unit: 32-lane fp32 vector unit (32 x 1 in Tasa, two per core).
//
// Each cycle it takes two operand lines (32 fp32 lanes each) and an operation
// and returns the result line one cycle later. Operations: add, subtract,
// multiply, maximum, ReLU and copy. It works either on its own over scratchpad
// lines or as the post-processing stage of the systolic array / MAC trees
// (their fp32 results are lines of the same format).
//
// Interface: in_valid/op/a/b in, out_valid/out one cycle later; no stall.
//
// From the paper: 32 lanes, two units per core, element-wise vector work and
// post-processing. The paper also names non-linear functions without saying
// which; only ReLU and max are built here (no exponent, GeLU or softmax).
module vector_unit
  import tasa_pkg::*;
#(
  parameter int LANES = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  vec_op_e op,
  input  fp32_t   a [LANES],
  input  fp32_t   b [LANES],
  output logic    out_valid,
  output fp32_t   out [LANES]
);
  fp32_t r [LANES];

  always_comb
    for (int l = 0; l < LANES; l++) begin
      unique case (op)
        VOP_ADD:  r[l] = fp32_add(a[l], b[l]);
        VOP_SUB:  r[l] = fp32_add(a[l], {~b[l][31], b[l][30:0]});
        VOP_MUL:  r[l] = fp32_mul(a[l], b[l]);
        VOP_MAX:  r[l] = fp32_max(a[l], b[l]);
        VOP_RELU: r[l] = a[l][31] ? 32'd0 : a[l];
        default:  r[l] = a[l];
      endcase
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) out[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= r;
    end
  end
endmodule
