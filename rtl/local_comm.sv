// local_comm: router-less communication unit of a P-core.
//
// A P-core has one dedicated link to the E-core at the root of its core group,
// so it needs no router: a FIFO buffers flits leaving the core (Local OUT) and
// another buffers flits arriving from the E-core (Local IN). Both sides use
// valid/ready handshakes; one 128-byte flit per cycle in each direction, which
// matches the bandwidth of the core's local DRAM. The unit counts the flits it
// has sent and received.
//
// From the paper: the two FIFOs and the dedicated link to the E-core.
// Own choices: FIFO depth, handshakes, counters.
module local_comm
  import tasa_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  // core side
  input  logic   core_tx_valid,
  output logic   core_tx_ready,
  input  flit_t  core_tx_flit,
  output logic   core_rx_valid,
  input  logic   core_rx_ready,
  output flit_t  core_rx_flit,
  // link to the E-core
  output logic   link_tx_valid,
  input  logic   link_tx_ready,
  output flit_t  link_tx_flit,
  input  logic   link_rx_valid,
  output logic   link_rx_ready,
  input  flit_t  link_rx_flit,
  output logic [31:0] tx_count,
  output logic [31:0] rx_count
);
  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_out (
    .clk, .rst_n,
    .in_valid(core_tx_valid), .in_ready(core_tx_ready), .in_data(core_tx_flit),
    .out_valid(link_tx_valid), .out_ready(link_tx_ready), .out_data(link_tx_flit));

  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_in (
    .clk, .rst_n,
    .in_valid(link_rx_valid), .in_ready(link_rx_ready), .in_data(link_rx_flit),
    .out_valid(core_rx_valid), .out_ready(core_rx_ready), .out_data(core_rx_flit));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_count <= '0; rx_count <= '0;
    end else begin
      if (link_tx_valid && link_tx_ready) tx_count <= tx_count + 1;
      if (link_rx_valid && link_rx_ready) rx_count <= rx_count + 1;
    end
  end
endmodule
