// md_distance_calc: the distance calculator processing element (PE0).
//
// Takes one (home atom, neighbor atom) pair per cycle and computes the
// displacement d = home - neighbor and its squared length r2. The pair leaves
// the PE only if r2 is below the squared cutoff radius; all other pairs are
// dropped. This conditional output is the "dynamic data flow" the architecture
// is built around: the PE accepts a pair every cycle (initiation interval 1)
// but produces an output on only a fraction of them.
//
// Pair with r2 == 0 (an atom against itself, when the neighbor cell is the
// home cell) is also dropped; this design's choice, the paper does not say how
// the self-pair is excluded.
//
// Pipeline (4 register stages, latency 4 cycles from in accept to out_valid):
//   1: dx, dy, dz = home - neighbor
//   2: dx^2, dy^2, dz^2
//   3: dx^2 + dy^2
//   4: r2 = (dx^2 + dy^2) + dz^2, cutoff test sets out_valid
// Handshake: valid/ready on both sides. The whole pipeline stalls (holds)
// while its last stage carries an output that is not accepted; in_ready is
// therefore independent of in_valid. cutoff2 must be held stable while pairs
// are in flight.
// busy is high while any stage holds a pair, so the producer can tell when
// all pairs it sent have been resolved.
module md_distance_calc
  import md_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  fp32_t  cutoff2,     // squared cutoff radius
  input  logic   in_valid,
  output logic   in_ready,
  input  pair_t  in_pair,
  output logic   out_valid,
  input  logic   out_ready,
  output dist_t  out_dist,
  output logic   busy,
  output logic   rejected     // pulse: a pair left stage 4 outside the cutoff
);

  typedef struct packed {
    logic [HIDX_W-1:0] hidx;
    fp32_t a, b, c;     // dx,dy,dz then their squares
    fp32_t dx, dy, dz;
    fp32_t q1, q2;
  } st_t;

  logic [3:1] v;
  st_t        s1, s2, s3;
  dist_t      s4;
  logic       en;
  fp32_t      r2_next;
  logic       pass_next;

  assign en       = !(out_valid && !out_ready);
  assign in_ready = en;
  assign busy     = (|v) || out_valid;

  assign r2_next   = fp_add(s3.a, s3.c);
  assign pass_next = fp_pos_lt(r2_next, cutoff2) && (r2_next[30:0] != 31'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v         <= '0;
      out_valid <= 1'b0;
      rejected  <= 1'b0;
    end else begin
      rejected <= 1'b0;
      if (en) begin
        v[1]      <= in_valid;
        v[2]      <= v[1];
        v[3]      <= v[2];
        out_valid <= v[3] && pass_next;
        rejected  <= v[3] && !pass_next;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      s1.hidx <= in_pair.hidx;
      s1.dx   <= fp_sub(in_pair.home.x, in_pair.nbr.x);
      s1.dy   <= fp_sub(in_pair.home.y, in_pair.nbr.y);
      s1.dz   <= fp_sub(in_pair.home.z, in_pair.nbr.z);
      s1.a    <= FP_ZERO;
      s1.b    <= FP_ZERO;
      s1.c    <= FP_ZERO;
      s1.q1   <= in_pair.home.q;
      s1.q2   <= in_pair.nbr.q;

      s2   <= s1;
      s2.a <= fp_mul(s1.dx, s1.dx);
      s2.b <= fp_mul(s1.dy, s1.dy);
      s2.c <= fp_mul(s1.dz, s1.dz);

      s3   <= s2;
      s3.a <= fp_add(s2.a, s2.b);

      s4.hidx <= s3.hidx;
      s4.dx   <= s3.dx;
      s4.dy   <= s3.dy;
      s4.dz   <= s3.dz;
      s4.r2   <= r2_next;
      s4.q1   <= s3.q1;
      s4.q2   <= s3.q2;
    end
  end

  assign out_dist = s4;

  // An offered output must stay offered until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_dist));

endmodule
