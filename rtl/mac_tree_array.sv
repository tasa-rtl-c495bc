// mac_tree_array: the GEMV engine of the E-core, 12 MAC trees of 32 inputs.
//
// The input register holds one 32-element slice of the input vector and is
// broadcast to every tree; each tree has its own weight register, so each tree
// computes one output element (one row of the weight matrix, e.g. one key of
// the KV cache against the query). Weights arrive as 128-byte lines of 64 bf16
// values, i.e. two trees' worth per line: the first line fills trees 0 and 1,
// the next trees 2 and 3, and so on. The cycle that delivers the last pair also
// fires the trees (that pair is taken straight from the line), so one weight
// line is consumed every cycle and a step happens every NT/2 lines.
//
// Weight lines can come from three places, chosen by `w_src`: the scratchpad,
// the local DRAM directly (bypassing the scratchpad) or the communication unit
// directly (lines streamed by the P-cores of the group out of their own DRAM,
// which is how P-core bandwidth is shared with the E-core). Each source has a
// valid/ready pair; only the selected one sees ready.
//
// Interface: `clear` zeroes all accumulators and the weight fill position.
// `x_load` with `x_line` (first 32 bf16 used) sets the input register. `step`
// pulses on every firing. `acc[t]` are the tree accumulators, also packed as
// fp32 lanes 0..NT-1 of `out_line` (other lanes zero).
//
// From the paper: 12 trees of 32x1, input broadcast, per-tree weights, input
// register, weight registers, and the three weight paths. Own choices: line
// packing, fill order, single-cycle firing.
module mac_tree_array
  import tasa_pkg::*;
#(
  parameter int NT = 12,
  parameter int N  = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   x_load,
  input  line_t  x_line,
  input  wsrc_e  w_src,
  input  logic   spm_valid,
  output logic   spm_ready,
  input  line_t  spm_line,
  input  logic   dram_valid,
  output logic   dram_ready,
  input  line_t  dram_line,
  input  logic   comm_valid,
  output logic   comm_ready,
  input  line_t  comm_line,
  output logic   step,
  output fp32_t  acc [NT],
  output line_t  out_line
);
  localparam int PAIRS = NT / 2;

  bf16_t xr [N];
  bf16_t wr [NT][N];
  logic [$clog2(PAIRS+1)-1:0] fill;

  logic  w_valid;
  line_t w_line;

  always_comb begin
    spm_ready  = (w_src == WSRC_SPM);
    dram_ready = (w_src == WSRC_DRAM);
    comm_ready = (w_src == WSRC_COMM);
    unique case (w_src)
      WSRC_DRAM: begin w_valid = dram_valid; w_line = dram_line; end
      WSRC_COMM: begin w_valid = comm_valid; w_line = comm_line; end
      default:   begin w_valid = spm_valid;  w_line = spm_line;  end
    endcase
  end

  assign step = w_valid && !clear && (int'(fill) == PAIRS - 1);

  // weights seen by the trees this cycle: registers, except the pair arriving now
  bf16_t wt [NT][N];
  always_comb
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < N; i++) begin
        if (t / 2 == PAIRS - 1)
          wt[t][i] = (t % 2 == 0) ? w_line[16*i +: 16] : w_line[16*(N+i) +: 16];
        else
          wt[t][i] = wr[t][i];
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= '0;
      for (int i = 0; i < N; i++) xr[i] <= '0;
      for (int t = 0; t < NT; t++)
        for (int i = 0; i < N; i++) wr[t][i] <= '0;
    end else begin
      if (x_load)
        for (int i = 0; i < N; i++) xr[i] <= x_line[16*i +: 16];
      if (clear) begin
        fill <= '0;
      end else if (w_valid) begin
        for (int i = 0; i < N; i++) begin
          wr[2*fill][i]   <= w_line[16*i +: 16];
          wr[2*fill+1][i] <= w_line[16*(N+i) +: 16];
        end
        fill <= (int'(fill) == PAIRS - 1) ? '0 : fill + 1'b1;
      end
    end
  end

  for (genvar t = 0; t < NT; t++) begin : g_tree
    mac_tree #(.N(N)) u_tree (
      .clk, .rst_n,
      .clear (clear),
      .step  (step),
      .w     (wt[t]),
      .x     (xr),
      .acc   (acc[t])
    );
  end

  always_comb begin
    out_line = '0;
    for (int t = 0; t < NT; t++) out_line[32*t +: 32] = acc[t];
  end

  // the tree array and the line format need an even tree count that fits a line
  initial assert (NT % 2 == 0 && NT <= LINE_W / 32 && 2 * N <= LINE_W / 16);
endmodule
