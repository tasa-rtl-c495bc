// tb_mac_tree_array: GEMV steps with weights from each of the three sources
// (scratchpad, DRAM bypass, communication bypass). The unselected sources
// present junk lines that must be ignored; the selected source has random
// gaps. Accumulators are checked against integer dot products, the number of
// step pulses is counted, and a gap-free stream must fire one step every
// NT/2 = 6 lines (one line per cycle).
module tb_mac_tree_array;
  import tasa_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int NT = 12, N = 32;
  logic clear, x_load, spm_valid, spm_ready, dram_valid, dram_ready, comm_valid, comm_ready, step;
  line_t x_line, spm_line, dram_line, comm_line, out_line;
  wsrc_e w_src;
  fp32_t acc [NT];

  mac_tree_array #(.NT(NT), .N(N)) dut (.*);

  int steps_seen = 0;
  always @(posedge clk) if (step) steps_seen++;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t junk();
    line_t l;
    for (int k = 0; k < LINE_W / 32; k++) l[32*k +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    longint ref_acc [NT];
    int xv [N];
    clear = 0; x_load = 0; x_line = '0; w_src = WSRC_SPM;
    spm_valid = 0; dram_valid = 0; comm_valid = 0;
    spm_line = '0; dram_line = '0; comm_line = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 9; trial++) begin
      int steps, s0, t0;
      bit gaps;
      w_src = wsrc_e'(trial % 3);
      gaps  = (trial >= 3);
      steps = 1 + int'($urandom % 4);
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (spm_ready != (w_src == WSRC_SPM) || dram_ready != (w_src == WSRC_DRAM) ||
          comm_ready != (w_src == WSRC_COMM)) begin
        failures++; $display("ready does not follow source %0d", w_src);
      end
      foreach (ref_acc[t]) ref_acc[t] = 0;
      s0 = steps_seen;
      for (int s = 0; s < steps; s++) begin
        x_line = '0;
        for (int i = 0; i < N; i++) begin
          xv[i] = int'($urandom % 15) - 7;
          x_line[16*i +: 16] = int_to_bf16(xv[i]);
        end
        x_load = 1;
        @(negedge clk);
        x_load = 0;
        t0 = $time;
        for (int p = 0; p < NT / 2; p++) begin
          line_t wl;
          wl = '0;
          for (int h = 0; h < 2; h++)
            for (int i = 0; i < N; i++) begin
              int w;
              w = int'($urandom % 15) - 7;
              wl[16*(N*h + i) +: 16] = int_to_bf16(w);
              ref_acc[2*p + h] += longint'(w * xv[i]);
            end
          if (gaps) while ($urandom % 3 == 0) begin
            spm_valid = 0; dram_valid = 0; comm_valid = 0;
            @(negedge clk);
          end
          // the selected source carries the line, the others junk
          spm_line = junk(); dram_line = junk(); comm_line = junk();
          spm_valid = $urandom; dram_valid = $urandom; comm_valid = $urandom;
          unique case (w_src)
            WSRC_SPM:  begin spm_line = wl;  spm_valid = 1; end
            WSRC_DRAM: begin dram_line = wl; dram_valid = 1; end
            default:   begin comm_line = wl; comm_valid = 1; end
          endcase
          @(negedge clk);
        end
        spm_valid = 0; dram_valid = 0; comm_valid = 0;
        if (!gaps) begin
          checks++;
          if (($time - t0) / 2 != NT / 2) begin failures++; $display("step took %0d cycles", ($time - t0) / 2); end
        end
      end
      @(negedge clk);
      checks++;
      if (steps_seen - s0 != steps) begin failures++; $display("trial %0d: %0d steps, expected %0d", trial, steps_seen - s0, steps); end
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (acc[t] !== int_to_fp32(ref_acc[t]) || out_line[32*t +: 32] !== acc[t]) begin
          failures++;
          if (failures < 10) $display("trial %0d tree %0d: acc %h expected %h (%0d)", trial, t, acc[t], int_to_fp32(ref_acc[t]), ref_acc[t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
