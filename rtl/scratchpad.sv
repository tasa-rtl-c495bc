// scratchpad: per-core SRAM scratchpad, 128 KB as 1024 lines of 128 bytes.
//
// One line is one NoC flit and one DRAM burst, so every unit of the core moves
// whole lines. Two synchronous read ports (data one cycle after the address)
// serve the compute engine's two operand streams; one write port takes results,
// DRAM fills and NoC arrivals. A read of the line being written in the same
// cycle returns the old contents.
//
// From the paper: 128 KB of SRAM per core shared by all units of the core.
// Own choices: line width, port count, read latency. Synthesis maps the array
// to SRAM macros; here it is a plain memory array.
module scratchpad
  import tasa_pkg::*;
#(
  parameter int LINES = SPM_LINES
) (
  input  logic                     clk,
  input  logic                     re0,
  input  logic [$clog2(LINES)-1:0] raddr0,
  output line_t                    rdata0,
  input  logic                     re1,
  input  logic [$clog2(LINES)-1:0] raddr1,
  output line_t                    rdata1,
  input  logic                     we,
  input  logic [$clog2(LINES)-1:0] waddr,
  input  line_t                    wdata
);
  line_t mem [LINES];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr] <= wdata;
    if (re0) rdata0 <= mem[raddr0];
    if (re1) rdata1 <= mem[raddr1];
  end
endmodule
