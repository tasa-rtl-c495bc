// tb_fp_pkg: reference number conversions for the testbenches.
// Integers of magnitude below 2^24 are exact in fp32 and below 2^8 exact in
// bf16, so testbenches use small integer data and compare bit patterns
// exactly against integer arithmetic done here.
package tb_fp_pkg;
  function automatic logic [31:0] int_to_fp32(longint v);
    logic s;
    longint m;
    int msb;
    if (v == 0) return 32'd0;
    s = (v < 0);
    m = s ? -v : v;
    msb = 0;
    for (int i = 0; i < 63; i++) if (m[i]) msb = i;
    // keep the 24 most significant bits (truncation, like the design)
    if (msb > 23) m = m >> (msb - 23);
    else          m = m << (23 - msb);
    return {s, 8'(127 + msb), m[22:0]};
  endfunction

  function automatic logic [15:0] int_to_bf16(int v);
    logic [31:0] f;
    f = int_to_fp32(longint'(v));
    return f[31:16];
  endfunction
endpackage
