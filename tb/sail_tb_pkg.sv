// sail_tb_pkg -- reference arithmetic shared by the SAIL testbenches.
//
// to_fp32 gives the IEEE-754 single-precision bits of an integer of at most
// 24 significant bits (exact, no rounding), computed through the simulator's
// double-precision real type, independently of the RTL's bit-serial method.
// sext returns a w-bit two's-complement field as an int.
package sail_tb_pkg;
  function automatic logic [31:0] to_fp32(input longint v);
    logic [63:0] d;
    logic [31:0] f;
    if (v == 0) return 32'h0;
    d = $realtobits(real'(v));
    f[31]    = d[63];
    f[30:23] = 8'(int'(d[62:52]) - 1023 + 127);
    f[22:0]  = d[51:29];
    return f;
  endfunction

  function automatic int sext(input int unsigned val, input int w);
    int unsigned m;
    m = val & ((1 << w) - 1);
    if (m[w-1]) return int'(m) - (1 << w);
    return int'(m);
  endfunction
endpackage
