// tb_fp_pkg: reference conversions between binary32 words and real (double)
// for the testbenches, written from the IEEE-754 bit layouts so that they
// do not depend on the simulator's handling of shortreal. to_f32 rounds to
// nearest-even and flushes subnormals to zero, like the hardware.
package tb_fp_pkg;

  function automatic real to_real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    // exponent rebias: e64 = e32 - 127 + 1023
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_f32(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  // Random float with a chosen exponent window around 1.0.
  function automatic logic [31:0] rand_f32(int span);
    int e;
    e = 127 + int'($urandom_range(2 * span)) - span;
    return {1'($urandom_range(1)), e[7:0], 23'($urandom)};
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Relative closeness with an absolute floor, for results that went
  // through many roundings.
  function automatic bit close(real got, real want, real rtol, real atol);
    return rabs(got - want) <= atol + rtol * rabs(want);
  endfunction

endpackage
