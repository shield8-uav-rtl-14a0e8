// tb_ref_pkg: reference arithmetic for the testbenches, built on the
// simulator's double-precision reals and independent of the RTL functions.
// real_to_fp rounds a real to a binary format with mbits stored mantissa bits
// and an 8-bit exponent (23: FP32, 7: BF16), to nearest even, flushing
// subnormals to zero like the RTL does.
package tb_ref_pkg;
  function automatic logic [31:0] real_to_fp(input real r, input int mbits);
    logic [63:0] b;
    int          e;
    logic [52:0] m;
    logic [52:0] keep;
    logic        g, st;
    int          drop;
    if (r == 0.0) return 32'd0;
    b    = $realtobits(r);
    e    = int'(b[62:52]) - 1023 + 127;
    m    = {1'b1, b[51:0]};
    drop = 52 - mbits;
    keep = m >> drop;
    g    = m[drop-1];
    st   = (m & ((53'd1 << (drop - 1)) - 53'd1)) != 0;
    if (g && (st || keep[0])) keep = keep + 53'd1;
    if (keep[mbits+1]) begin keep = keep >> 1; e = e + 1; end
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    if (e <= 0) return {b[63], 31'd0};
    return {b[63], 8'(e), 23'(keep & ((53'd1 << mbits) - 53'd1)) << (23 - mbits)};
  endfunction

  function automatic real fp_to_real(input logic [31:0] f);
    if (f[30:23] == 8'd0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] rnd32(input real r);
    return real_to_fp(r, 23);
  endfunction

  function automatic logic [15:0] rnd16(input real r);
    logic [31:0] f;
    f = real_to_fp(r, 7);
    return f[31:16];
  endfunction

  // round half away from zero
  function automatic longint round_away(input real r);
    if (r >= 0.0) return longint'($floor(r + 0.5));
    return -longint'($floor(-r + 0.5));
  endfunction

  function automatic real pow2(input int n);
    real p;
    p = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) p = p * 2.0;
    else for (int i = 0; i < -n; i++) p = p / 2.0;
    return p;
  endfunction

  // random FP32 with exponent in [elo, ehi], random mantissa
  function automatic logic [31:0] rand_fp(input int elo, input int ehi, input logic neg);
    return {neg, 8'(elo + int'($urandom_range(ehi - elo))), 23'($urandom)};
  endfunction
endpackage
