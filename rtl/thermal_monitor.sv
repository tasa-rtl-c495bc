// thermal_monitor: die-level thermal threshold check that triggers DVFS.
//
// Every cycle it takes one reading per core (degrees C, from on-die sensors
// that are outside this RTL), finds the hottest core and its temperature, and
// raises `dvfs_trigger` while that maximum exceeds the threshold (85 C in the
// evaluated configuration). The readings are registered, so outputs follow the
// inputs by one cycle. What the DVFS controller then does with the clock and
// supply is not part of this RTL.
//
// From the paper: the 85 C threshold and the rule that DVFS starts once the
// maximum temperature exceeds it. Own choices: 8-bit readings, one-cycle
// latency, lowest index wins a tie.
module thermal_monitor #(
  parameter int         NCORES      = 48,
  parameter logic [7:0] THRESHOLD_C = 8'd85
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  temp_c [NCORES],
  output logic [7:0]  max_temp_c,
  output logic [$clog2(NCORES)-1:0] hottest,
  output logic        dvfs_trigger
);
  logic [7:0] m;
  logic [$clog2(NCORES)-1:0] h;

  always_comb begin
    m = temp_c[0];
    h = '0;
    for (int c = 1; c < NCORES; c++)
      if (temp_c[c] > m) begin m = temp_c[c]; h = $clog2(NCORES)'(c); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_temp_c <= '0; hottest <= '0; dvfs_trigger <= 1'b0;
    end else begin
      max_temp_c   <= m;
      hottest      <= h;
      dvfs_trigger <= (m > THRESHOLD_C);
    end
  end
endmodule
