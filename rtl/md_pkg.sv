// md_pkg: types, constants and single-precision arithmetic shared by the
// short-range non-bonded force accelerator.
//
// Every number on the datapath is an IEEE-754 binary32 word (fp32_t). The
// arithmetic below is plain combinational logic meant to be wrapped in
// pipeline registers by the processing elements:
//   fp_mul  - product, round to nearest even
//   fp_add  - sum, round to nearest (ties to even on the kept bits)
//   fp_sub  - a - b
//   fp_rsqrt_seed - first guess of 1/sqrt(x) by the well-known integer trick
//                   0x5f3759df - (bits >> 1), refined by Newton steps in the
//                   force pipeline.
// Simplifications (this design's own choice): subnormal inputs and results
// are flushed to zero, overflow saturates to infinity, NaN is not produced or
// propagated specially. The force model never needs those ranges.
//
// Records moved between blocks:
//   atom_t  - one atom: position x, y, z and charge q (128 bits). This is also
//             the 128-bit memory word; a written-back force uses x, y, z for
//             fx, fy, fz and q = 0.
//   pair_t  - one (home atom, neighbor atom) pair plus the home atom's slot
//   dist_t  - an in-cutoff pair as the distance calculator forwards it
//   force_t - the force one neighbor exerts on one home atom
package md_pkg;

  typedef logic [31:0] fp32_t;

  // Home-atom slot index carried with each pair (slot inside the home cell).
  localparam int unsigned HIDX_W = 16;
  // Memory word address width (one word = one 128-bit atom_t).
  localparam int unsigned ADDR_W = 32;

  localparam fp32_t FP_ZERO  = 32'h0000_0000;
  localparam fp32_t FP_HALF  = 32'h3f00_0000;
  localparam fp32_t FP_1P5   = 32'h3fc0_0000;
  localparam fp32_t FP_INF   = 32'h7f80_0000;

  typedef struct packed {
    fp32_t x;
    fp32_t y;
    fp32_t z;
    fp32_t q;
  } atom_t;

  typedef struct packed {
    logic [HIDX_W-1:0] hidx;
    atom_t             home;
    atom_t             nbr;
  } pair_t;

  typedef struct packed {
    logic [HIDX_W-1:0] hidx;
    fp32_t dx;   // home minus neighbor
    fp32_t dy;
    fp32_t dz;
    fp32_t r2;   // dx*dx + dy*dy + dz*dz
    fp32_t q1;   // home charge
    fp32_t q2;   // neighbor charge
  } dist_t;

  typedef struct packed {
    logic [HIDX_W-1:0] hidx;
    fp32_t fx;
    fp32_t fy;
    fp32_t fz;
  } force_t;

  // One request on a memory port: read (we=0) or write (we=1) of one word.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    atom_t             wdata;
  } mem_req_t;

  // ---------------------------------------------------------------------
  // Single-precision arithmetic
  // ---------------------------------------------------------------------

  // Pack sign, unbiased-exponent-carrying value and 24-bit significand with
  // guard/sticky into a rounded binary32 word. exp is the biased exponent of
  // a significand of the form 1.xxx (bit 23 set).
  function automatic fp32_t fp_round_pack(input logic sign, input int exp,
                                          input logic [23:0] sig,
                                          input logic guard, input logic sticky);
    logic [24:0] r;
    int          e;
    e = exp;
    r = {1'b0, sig};
    if (guard && (sticky || sig[0])) r = r + 25'd1;
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e <= 0)        return {sign, 31'd0};
    else if (e >= 255) return {sign, FP_INF[30:0]};
    else               return {sign, e[7:0], r[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47])
      return fp_round_pack(s, e + 1, p[47:24], p[23], |p[22:0]);
    else
      return fp_round_pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       mag, lit;
    logic [50:0] mb, ms, sum;
    int          sh, e, lead;
    logic        sticky;
    if (a[30:0] >= b[30:0]) begin mag = a; lit = b; end
    else                    begin mag = b; lit = a; end
    if (mag[30:23] == 8'd0)   return FP_ZERO;
    if (lit[30:23] == 8'd0) return mag;
    // 1 carry bit, 24 significand bits, 26 bits below the last kept bit
    mb = {1'b0, 1'b1, mag[22:0], 26'd0};
    ms = {1'b0, 1'b1, lit[22:0], 26'd0};
    sh = int'(mag[30:23]) - int'(lit[30:23]);
    sticky = 1'b0;
    if (sh > 50) begin
      ms = '0;
      sticky = 1'b1;
    end else begin
      for (int i = 0; i < 51; i++)
        if (i < sh && ms[i]) sticky = 1'b1;
      ms = ms >> sh;
    end
    if (mag[31] == lit[31]) sum = mb + ms;
    else                      sum = mb - ms - {50'd0, sticky};
    if (sum == '0) return FP_ZERO;
    lead = 0;
    for (int i = 0; i < 51; i++)
      if (sum[i]) lead = i;
    e = int'(mag[30:23]) + (lead - 49);
    if (lead == 50) begin
      sticky = sticky | sum[0];
      sum = sum >> 1;
    end else begin
      sum = sum << (49 - lead);
    end
    return fp_round_pack(mag[31], e, sum[49:26], sum[25], (|sum[24:0]) | sticky);
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic fp32_t fp_rsqrt_seed(input fp32_t x);
    return 32'h5f37_59df - {1'b0, x[31:1]};
  endfunction

  // a < b for non-negative a and b (ordering of the bit patterns)
  function automatic logic fp_pos_lt(input fp32_t a, input fp32_t b);
    return a[30:0] < b[30:0];
  endfunction

endpackage
