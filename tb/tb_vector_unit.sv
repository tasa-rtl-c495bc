// tb_vector_unit: random operands of every vector operation, results checked
// one cycle later against integer references (small integers are exact).
module tb_vector_unit;
  import tasa_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int LANES = 32;
  logic in_valid, out_valid;
  vec_op_e op;
  fp32_t a [LANES], b [LANES], out [LANES];

  vector_unit #(.LANES(LANES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int av [LANES], bv [LANES];
    longint ev;
    fp32_t ev_b;
    in_valid = 0; op = VOP_ADD;
    foreach (a[i]) begin a[i] = '0; b[i] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 120; trial++) begin
      op = vec_op_e'(trial % 6);
      for (int i = 0; i < LANES; i++) begin
        av[i] = int'($urandom % 2001) - 1000;
        bv[i] = int'($urandom % 2001) - 1000;
        a[i] = int_to_fp32(av[i]); b[i] = int_to_fp32(bv[i]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int i = 0; i < LANES; i++) begin
        unique case (op)
          VOP_ADD:  ev = av[i] + bv[i];
          VOP_SUB:  ev = av[i] - bv[i];
          VOP_MUL:  ev = longint'(av[i]) * bv[i];
          VOP_MAX:  ev = (av[i] > bv[i]) ? av[i] : bv[i];
          VOP_RELU: ev = (av[i] > 0) ? av[i] : 0;
          default:  ev = av[i];
        endcase
        checks++;
        // a product of zero with a negative number is -0
        if (op == VOP_MUL && ev == 0 && ((av[i] < 0) != (bv[i] < 0))) ev_b = 32'h8000_0000;
        else ev_b = int_to_fp32(ev);
        if (out[i] !== ev_b) begin
          failures++;
          if (failures < 10) $display("op %0d lane %0d: %0d,%0d -> %h expected %h", op, i, av[i], bv[i], out[i], ev_b);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
