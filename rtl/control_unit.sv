// control_unit: instruction queue and issue logic of a core.
//
// Instructions arrive on a valid/ready port into a queue and issue in order.
// Each opcode has its own unit in the core (DMA load, DMA store, GEMM or GEMV
// engine, vector unit, NoC send, NoC receive), started by a one-cycle pulse on
// `start[op]` with the instruction on `issued`; the unit answers with a
// one-cycle `done[op]`. Instead of a data scoreboard the issue logic tracks the
// shared resources of the core: the scratchpad read ports, the scratchpad write
// port, the memory controller, the outgoing link and the incoming link. An
// instruction issues when its unit is idle and none of its resources is in use,
// so, for instance, a P-core can stream DRAM lines to its E-core (bandwidth
// sharing) while its systolic arrays work out of the scratchpad. An instruction
// with `sync` set waits until everything before it has finished; software uses
// it to order dependent work. NOP retires at once.
//
// From the paper: a control unit manages the computation tasks according to
// instructions. The instruction set, the queue and the resource-based issue
// rule are this design's own.
module control_unit
  import tasa_pkg::*;
#(
  parameter int QDEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  output logic        start [N_OPS],
  output instr_t      issued,
  input  logic        done  [N_OPS],
  output logic        idle,
  output logic [31:0] retired
);
  instr_t q_head;
  logic   q_valid, q_pop;

  sync_fifo #(.WIDTH($bits(instr_t)), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_head));

  // resources used by an instruction
  function automatic logic [N_RES-1:0] res_of(instr_t i);
    logic [N_RES-1:0] r;
    r = '0;
    unique case (i.op)
      OP_LOAD:  begin r[RES_MEM] = 1'b1; r[RES_SPM_W] = 1'b1; end
      OP_STORE: begin r[RES_MEM] = 1'b1; r[RES_SPM_R] = 1'b1; end
      OP_GEMM:  begin r[RES_SPM_R] = 1'b1; r[RES_SPM_W] = 1'b1; end
      OP_GEMV:  begin
        r[RES_SPM_R] = 1'b1; r[RES_SPM_W] = 1'b1;
        if (i.sub[1:0] == WSRC_DRAM) r[RES_MEM] = 1'b1;
        if (i.sub[1:0] == WSRC_COMM) r[RES_RX] = 1'b1;
      end
      OP_VEC:   begin r[RES_SPM_R] = 1'b1; r[RES_SPM_W] = 1'b1; end
      OP_SEND:  begin
        r[RES_TX] = 1'b1;
        if (i.sub[0]) r[RES_MEM] = 1'b1; else r[RES_SPM_R] = 1'b1;
      end
      OP_RECV:  begin r[RES_RX] = 1'b1; r[RES_SPM_W] = 1'b1; end
      default:  ;
    endcase
    return r;
  endfunction

  logic [N_RES-1:0] res_busy [N_OPS];    // resources held by each running op
  logic [N_OPS-1:0] op_busy;
  logic [N_RES-1:0] busy_all;
  logic can_issue;
  logic is_nop;      // NOP retires without starting a unit
  assign is_nop = (q_head.op == OP_NOP);

  always_comb begin
    busy_all = '0;
    for (int o = 0; o < N_OPS; o++) busy_all |= res_busy[o];
    can_issue = q_valid && (is_nop || !op_busy[q_head.op]) && ((res_of(q_head) & busy_all) == '0)
                && (!q_head.sync || op_busy == '0);
    q_pop = can_issue;
    for (int o = 0; o < N_OPS; o++)
      start[o] = can_issue && !is_nop && (int'(q_head.op) == o);
    idle = !q_valid && (op_busy == '0);
  end
  assign issued = q_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_busy <= '0;
      retired <= '0;
      for (int o = 0; o < N_OPS; o++) res_busy[o] <= '0;
    end else begin
      logic [31:0] n;
      n = '0;
      for (int o = 0; o < N_OPS; o++) begin
        if (op_busy[o] && done[o]) begin
          op_busy[o]  <= 1'b0;
          res_busy[o] <= '0;
          n = n + 1;
        end
        if (start[o]) begin
          op_busy[o]  <= 1'b1;
          res_busy[o] <= res_of(q_head);
        end
      end
      if (can_issue && is_nop) n = n + 1;
      retired <= retired + n;
    end
  end

  // a unit must not report done while idle, and not in its start cycle
  for (genvar o = 0; o < N_OPS; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) done[o] |-> op_busy[o]);
  end
endmodule
