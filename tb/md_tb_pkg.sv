// md_tb_pkg: reference arithmetic for the testbenches.
//
// Converts between SystemVerilog real (double precision) and binary32 words
// by bit manipulation of the double's fields, independent of the design's own
// single-precision functions, and evaluates the pair force
//   F = (A/r^14 - B/r^8 + k q1 q2 / r^3) * d
// in double precision. Results of the single-precision hardware are compared
// with a tolerance scaled by the magnitude of the terms, so cancellation
// between the Lennard-Jones and Coulomb parts does not produce false errors.
package md_tb_pkg;

  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, 1'b1, d[51:29]} + {24'd0, d[28]};   // round half up
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic real to_real(input logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return 0.0;
    e = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // scalar factor s with F = s * d, and the sum of term magnitudes
  function automatic void pair_scalar(input real r2, input real q1, input real q2,
                                      input real a, input real b, input real k,
                                      output real s, output real mag);
    real ir2, ir3, ir8, ir14;
    ir2  = 1.0 / r2;
    ir3  = ir2 / $sqrt(r2);
    ir8  = ir2 * ir2 * ir2 * ir2;
    ir14 = ir8 * ir2 * ir2 * ir2;
    s    = a * ir14 - b * ir8 + k * q1 * q2 * ir3;
    mag  = rabs(a * ir14) + rabs(b * ir8) + rabs(k * q1 * q2 * ir3);
  endfunction

  // |got - want| within rel * scale (plus a tiny absolute floor)
  function automatic bit close(input real got, input real want, input real scale,
                               input real rel);
    return rabs(got - want) <= rel * scale + 1.0e-30;
  endfunction

endpackage
