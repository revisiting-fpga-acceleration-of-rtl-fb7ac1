// md_force_compute: the force computation processing element (PE1).
//
// For one in-cutoff pair with displacement d = (dx, dy, dz) and r2 = |d|^2 it
// evaluates, in single precision, the short-range non-bonded force on the
// home atom:
//     F = ( A / r^14  -  B / r^8  +  k * q1 * q2 / r^3 ) * d
// i.e. the Lennard-Jones term (A/|r|^14 - B/|r|^8) r plus the Coulomb term
// k q1 q2 / |r|^3 r. A, B and k are run-time constants (lj_a, lj_b, k_coul).
//
// 1/r comes from the integer seed 0x5f3759df - (r2 >> 1) refined by NEWTON
// Newton-Raphson steps y <- y * (1.5 - 0.5 * r2 * y^2); three steps reach
// single-precision accuracy. All higher inverse powers are products of 1/r.
// How the reciprocal and powers are formed is this design's choice; the
// formula is the paper's.
//
// Pipeline: fully pipelined, one pair per cycle (initiation interval 1),
// latency LAT = 2*NEWTON + 8 cycles (14 for NEWTON = 3):
//   stage 1            0.5*r2, seed, q1*q2
//   2 stages / step    t = 0.5*r2*y*y ; y = y*(1.5 - t)
//   then               1/r2, k*q1*q2 | 1/r3, 1/r4 | 1/r8, 1/r6, Coulomb term |
//                      1/r14, B/r8 | A/r14, Coulomb - B/r8 | scalar sum |
//                      F = scalar * d
// Handshake: valid/ready; the pipeline holds while its output is offered and
// not accepted. busy is high while any stage holds a pair.
module md_force_compute
  import md_pkg::*;
#(
  parameter int unsigned NEWTON = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  fp32_t  lj_a,
  input  fp32_t  lj_b,
  input  fp32_t  k_coul,
  input  logic   in_valid,
  output logic   in_ready,
  input  dist_t  in_dist,
  output logic   out_valid,
  input  logic   out_ready,
  output force_t out_force,
  output logic   busy
);

  localparam int unsigned LAT = 2 * NEWTON + 8;
  localparam int unsigned NS  = 2 * NEWTON + 1;   // first stage after Newton

  typedef struct packed {
    logic [HIDX_W-1:0] hidx;
    fp32_t dx, dy, dz;
    fp32_t h;      // 0.5 * r2
    fp32_t y;      // estimate of 1/r
    fp32_t t;      // Newton temporary
    fp32_t qq, kqq;
    fp32_t ir2, ir3, ir4, ir6, ir8, ir14;
    fp32_t ct, bt, at, s;
  } work_t;

  work_t        w   [LAT+1];   // w[0] is the input, w[n] the register of stage n
  work_t        nxt [1:LAT];
  logic [LAT:1] v;
  logic [LAT-1:0] vin;          // valid entering stage n+1
  logic         en;

  assign en        = !(v[LAT] && !out_ready);
  assign in_ready  = en;
  assign out_valid = v[LAT];
  assign busy      = |v;
  assign vin       = {v[LAT-1:1], in_valid};

  always_comb begin
    w[0]      = '0;
    w[0].hidx = in_dist.hidx;
    w[0].dx   = in_dist.dx;
    w[0].dy   = in_dist.dy;
    w[0].dz   = in_dist.dz;
    w[0].h    = in_dist.r2;    // r2 carried in h until stage 1 halves it
    w[0].y    = in_dist.q1;    // q1, q2 carried in y and t into stage 1
    w[0].t    = in_dist.q2;
  end

  for (genvar n = 1; n <= LAT; n++) begin : g_stage
    always_comb begin
      nxt[n] = w[n-1];
      if (n == 1) begin
        nxt[n].h  = fp_mul(w[n-1].h, FP_HALF);
        nxt[n].y  = fp_rsqrt_seed(w[n-1].h);
        nxt[n].qq = fp_mul(w[n-1].y, w[n-1].t);
        nxt[n].t  = FP_ZERO;
      end else if (n < NS + 1) begin
        if (n % 2 == 0) nxt[n].t = fp_mul(w[n-1].h, fp_mul(w[n-1].y, w[n-1].y));
        else            nxt[n].y = fp_mul(w[n-1].y, fp_sub(FP_1P5, w[n-1].t));
      end else begin
        case (n - NS)
          1: begin
            nxt[n].ir2 = fp_mul(w[n-1].y, w[n-1].y);
            nxt[n].kqq = fp_mul(k_coul, w[n-1].qq);
          end
          2: begin
            nxt[n].ir3 = fp_mul(w[n-1].ir2, w[n-1].y);
            nxt[n].ir4 = fp_mul(w[n-1].ir2, w[n-1].ir2);
          end
          3: begin
            nxt[n].ir8 = fp_mul(w[n-1].ir4, w[n-1].ir4);
            nxt[n].ir6 = fp_mul(w[n-1].ir4, w[n-1].ir2);
            nxt[n].ct  = fp_mul(w[n-1].kqq, w[n-1].ir3);
          end
          4: begin
            nxt[n].ir14 = fp_mul(w[n-1].ir8, w[n-1].ir6);
            nxt[n].bt   = fp_mul(lj_b, w[n-1].ir8);
          end
          5: begin
            nxt[n].at = fp_mul(lj_a, w[n-1].ir14);
            nxt[n].ct = fp_sub(w[n-1].ct, w[n-1].bt);
          end
          6: nxt[n].s = fp_add(w[n-1].at, w[n-1].ct);
          default: begin
            nxt[n].dx = fp_mul(w[n-1].s, w[n-1].dx);
            nxt[n].dy = fp_mul(w[n-1].s, w[n-1].dy);
            nxt[n].dz = fp_mul(w[n-1].s, w[n-1].dz);
          end
        endcase
      end
    end

    always_ff @(posedge clk)
      if (en) w[n] <= nxt[n];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  v[n] <= 1'b0;
      else if (en) v[n] <= vin[n-1];
    end
  end

  assign out_force.hidx = w[LAT].hidx;
  assign out_force.fx   = w[LAT].dx;
  assign out_force.fy   = w[LAT].dy;
  assign out_force.fz   = w[LAT].dz;

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_force));

endmodule
