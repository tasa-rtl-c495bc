// tb_control_unit: a random instruction stream (all opcodes, random source
// selects, occasional sync) is fed with random gaps; every unit is a model
// that finishes a random number of cycles after its start pulse. A reference
// model of the issue rule (in order; unit idle; no shared resource in use;
// sync waits for all) predicts every cycle whether the head issues, and the
// design must issue exactly then. Also checked: start order equals program
// order, the retired counter, and that GEMM did overlap a DRAM-sourced SEND
// (the bandwidth-sharing case) and a SPM-sourced SEND was held off by GEMM.
module tb_control_unit;
  import tasa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #0.2 rst_n = 0;   // asynchronous reset edge before the first clock
  always #1 clk = ~clk;

  logic instr_valid, instr_ready, idle;
  instr_t instr, issued;
  logic start [N_OPS], done [N_OPS];
  logic [31:0] retired;

  control_unit #(.QDEPTH(8)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N_RES-1:0] res(instr_t i);
    logic [N_RES-1:0] r;
    r = '0;
    case (i.op)
      OP_LOAD:  begin r[RES_MEM] = 1; r[RES_SPM_W] = 1; end
      OP_STORE: begin r[RES_MEM] = 1; r[RES_SPM_R] = 1; end
      OP_GEMM, OP_VEC: begin r[RES_SPM_R] = 1; r[RES_SPM_W] = 1; end
      OP_GEMV:  begin
        r[RES_SPM_R] = 1; r[RES_SPM_W] = 1;
        if (i.sub[1:0] == 2'd1) r[RES_MEM] = 1;
        if (i.sub[1:0] == 2'd2) r[RES_RX] = 1;
      end
      OP_SEND:  begin r[RES_TX] = 1; if (i.sub[0]) r[RES_MEM] = 1; else r[RES_SPM_R] = 1; end
      OP_RECV:  begin r[RES_RX] = 1; r[RES_SPM_W] = 1; end
      default: ;
    endcase
    return r;
  endfunction

  instr_t q [$];              // accepted, not yet issued
  bit busy_m [N_OPS];
  instr_t run_i [N_OPS];
  int cnt [N_OPS];
  int n_acc = 0, n_ret_exp = 0, NI = 3000;
  int overlap_share = 0, held_spm_send = 0;

  always @(posedge clk) if (rst_n) begin
    bit exp_issue;
    logic [N_RES-1:0] busy_r;
    bit any_busy, any_start;
    int n_done;
    busy_r = '0; any_busy = 0; n_done = 0; any_start = 0;
    for (int o = 0; o < N_OPS; o++) if (busy_m[o]) begin busy_r |= res(run_i[o]); any_busy = 1; end
    if (busy_m[OP_GEMM] && busy_m[OP_SEND] && run_i[OP_SEND].sub[0]) overlap_share++;
    exp_issue = 0;
    if (q.size() > 0) begin
      exp_issue = (q[0].op == OP_NOP || !busy_m[q[0].op]) && ((res(q[0]) & busy_r) == '0) &&
                  (!q[0].sync || !any_busy);
      if (q[0].op == OP_SEND && !q[0].sub[0] && busy_m[OP_GEMM] && !busy_m[OP_SEND]) held_spm_send++;
    end
    for (int o = 0; o < N_OPS; o++) any_start |= start[o];
    checks++;
    if (exp_issue != (any_start || (q.size() > 0 && q[0].op == OP_NOP && exp_issue))) begin
      failures++;
      if (failures < 10) $display("t=%0t head op %0d: expected issue %0d, started %0d", $time, q.size() ? q[0].op : 0, exp_issue, any_start);
    end
    for (int o = 0; o < N_OPS; o++) if (start[o]) begin
      checks++;
      if (q.size() == 0 || int'(q[0].op) != o || issued !== q[0]) begin
        failures++; if (failures < 10) $display("start %0d does not match program order", o);
      end
    end
    // model updates
    for (int o = 0; o < N_OPS; o++) if (busy_m[o] && done[o]) begin busy_m[o] = 0; n_done++; end
    if (exp_issue && q.size() > 0) begin
      if (q[0].op != OP_NOP) begin busy_m[q[0].op] = 1; run_i[q[0].op] = q[0]; cnt[q[0].op] = 1 + $urandom % 12; end
      else n_done++;
      void'(q.pop_front());
    end
    n_ret_exp += n_done;
    if (instr_valid && instr_ready) begin q.push_back(instr); n_acc++; instr_valid <= 0; end
  end

  // unit models and the instruction source
  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < N_OPS; o++) begin
      done[o] = 0;
      if (busy_m[o]) begin
        cnt[o]--;
        if (cnt[o] == 0) done[o] = 1;
      end
    end
    checks++;
    if (int'(retired) != n_ret_exp) begin failures++; if (failures < 10) $display("retired %0d expected %0d", retired, n_ret_exp); end
    if (!instr_valid && n_acc < NI && $urandom % 4 != 0) begin
      instr = '0;
      instr.op   = opcode_e'($urandom % 8);
      instr.sub  = 4'($urandom % 3);
      instr.sync = ($urandom % 10 == 0);
      instr.a    = 10'($urandom);
      instr_valid = 1;
    end
  end

  initial begin
    instr_valid = 0; instr = '0;
    foreach (done[o]) begin done[o] = 0; busy_m[o] = 0; cnt[o] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    wait (n_acc == NI && q.size() == 0);
    repeat (20) @(negedge clk);
    checks++;
    if (int'(retired) != NI || !idle) begin failures++; $display("retired %0d of %0d, idle %0d", retired, NI, idle); end
    checks++;
    if (overlap_share == 0 || held_spm_send == 0) begin
      failures++; $display("GEMM/SEND-from-DRAM overlap %0d, SEND-from-SPM held %0d", overlap_share, held_spm_send);
    end
    $display("GEMM overlapped DRAM-sourced SEND for %0d cycles; SPM-sourced SEND held for %0d", overlap_share, held_spm_send);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
