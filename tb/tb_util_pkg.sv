// tb_util_pkg: helpers shared by the core-level testbenches: an instruction
// constructor, the contents the DRAM channel model returns for a line never
// written, and operand/result line builders for small-integer GEMM data.
package tb_util_pkg;
  import tasa_pkg::*;
  import tb_fp_pkg::*;

  function automatic instr_t mk(opcode_e op, int sub = 0, bit sync = 0, int a = 0, int b = 0,
                                int c = 0, int len = 0, int daddr = 0,
                                int dx = 0, int dy = 0, int dcore = 0);
    instr_t i;
    i = '0;
    i.op = op; i.sub = 4'(sub); i.sync = sync;
    i.a = 10'(a); i.b = 10'(b); i.c = 10'(c); i.len = 10'(len);
    i.daddr = 23'(daddr);
    i.dst_x = GX_W'(dx); i.dst_y = GY_W'(dy); i.dst_core = CID_W'(dcore);
    return i;
  endfunction

  // a core line address is interleaved over the 16 channels (low 4 bits);
  // the channel model returns beat b of channel line L as {L[27:0], b} x4
  function automatic line_t init_line(longint core_addr);
    line_t l;
    longint chl;
    chl = core_addr >> 4;
    for (int b = 0; b < DRAM_BURST; b++) l[DRAM_IO*b +: DRAM_IO] = {4{chl[27:0], 4'(b)}};
    return l;
  endfunction

  // a line of 64 bf16 integers
  function automatic line_t bf_line(int v [64]);
    line_t l;
    for (int i = 0; i < 64; i++) l[16*i +: 16] = int_to_bf16(v[i]);
    return l;
  endfunction

  // a line of 32 fp32 integers
  function automatic line_t fp_line(longint v [32]);
    line_t l;
    for (int i = 0; i < 32; i++) l[32*i +: 32] = int_to_fp32(v[i]);
    return l;
  endfunction
endpackage
