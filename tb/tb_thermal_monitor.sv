// tb_thermal_monitor: random per-core temperatures; the registered maximum,
// the hottest core and the DVFS trigger (above 85 C) are checked one cycle
// later. Sweeps across the threshold so the trigger both fires and clears.
module tb_thermal_monitor;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  localparam int NCORES = 48;
  logic [7:0] temp_c [NCORES];
  logic [7:0] max_temp_c;
  logic [$clog2(NCORES)-1:0] hottest;
  logic dvfs_trigger;

  thermal_monitor #(.NCORES(NCORES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, h, n_trig;
    n_trig = 0;
    foreach (temp_c[i]) temp_c[i] = 8'd40;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      int top;
      top = 70 + (it % 30);     // sweep 70..99 C
      foreach (temp_c[i]) temp_c[i] = 8'(40 + $urandom % (top - 39));
      m = 0; h = 0;
      foreach (temp_c[i]) if (int'(temp_c[i]) > m) begin m = temp_c[i]; h = i; end
      @(negedge clk);
      checks++;
      if (int'(max_temp_c) != m || int'(hottest) != h || dvfs_trigger != (m > 85)) begin
        failures++;
        if (failures < 10) $display("max %0d/%0d hottest %0d/%0d trig %0d", max_temp_c, m, hottest, h, dvfs_trigger);
      end
      if (dvfs_trigger) n_trig++;
    end
    checks++;
    if (n_trig == 0 || n_trig == 500) begin failures++; $display("trigger never toggled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
