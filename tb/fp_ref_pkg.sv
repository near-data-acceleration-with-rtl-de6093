// fp_ref_pkg: reference binary32 helpers for testbenches, computed through the
// simulator's double-precision arithmetic. to_f32 rounds a double to binary32 with
// round-to-nearest-even and flushes subnormals to zero, like the PE's FMA.
package fp_ref_pkg;
  function automatic logic [31:0] to_f32(real r);
    logic [63:0] x;
    int          e;
    logic [23:0] m;
    logic        rb, st;
    x = $realtobits(r);
    if (x[62:0] == 63'd0) return {x[63], 31'd0};
    e  = int'(x[62:52]) - 1023 + 127;
    m  = {1'b0, x[51:29]};
    rb = x[28];
    st = |x[27:0];
    if (rb && (st || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;
    if (e >= 255) return {x[63], 8'hFF, 23'd0};
    if (e <= 0)   return {x[63], 31'd0};
    return {x[63], e[7:0], m[22:0]};
  endfunction

  function automatic real to_real(logic [31:0] f);
    logic [63:0] x;
    if (f[30:23] == 8'd0) return 0.0;
    x = '0;
    x[63] = f[31];
    x[62:52] = 11'(int'(f[30:23]) - 127 + 1023);
    x[51:29] = f[22:0];
    x[28:0]  = '0;
    return $bitstoreal(x);
  endfunction

  function automatic logic [31:0] rand_f32(int emin, int emax, int mbits);
    logic [31:0] r;
    logic [22:0] m;
    m = 23'($urandom);
    if (mbits < 23) m = m & ~((23'd1 << (23 - mbits)) - 23'd1);
    r = {1'($urandom), 8'(emin + int'($urandom % 32'(emax - emin + 1))), m};
    return r;
  endfunction
endpackage
