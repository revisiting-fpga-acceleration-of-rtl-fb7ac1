// md_force_compute_tb: self-checking test of the force computation pipeline.
//
// Random in-cutoff displacements and charges are fed; each output force is
// compared with a double-precision evaluation of
//   F = (A/r^14 - B/r^8 + k q1 q2 / r^3) * d
// within 2e-5 of the summed term magnitudes. Also checked: the home index
// travels with its pair, order is kept, latency is 14 cycles, one pair is
// accepted every cycle without backpressure, and outputs hold under random
// backpressure.
module md_force_compute_tb;
  import md_pkg::*;
  import md_tb_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  fp32_t  lj_a, lj_b, k_coul;
  logic   in_valid, in_ready, out_valid, out_ready, busy;
  dist_t  in_dist;
  force_t out_force;

  int checks = 0, failures = 0;
  int cycle = 0, acc_cycle = 0, in_count = 0;
  const real A = 1.0e-3, B = 2.0e-2, KC = 0.5;

  md_force_compute dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dist_t exp_q[$];

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  function automatic dist_t make_dist(int n);
    dist_t d;
    real   x, y, z, r2;
    do begin
      x = urand(-1.2, 1.2); y = urand(-1.2, 1.2); z = urand(-1.2, 1.2);
      r2 = x*x + y*y + z*z;
    end while (r2 < 0.09 || r2 > 1.44);
    d.hidx = HIDX_W'(n);
    d.dx = to_fp32(x); d.dy = to_fp32(y); d.dz = to_fp32(z);
    x = to_real(d.dx); y = to_real(d.dy); z = to_real(d.dz);
    d.r2 = to_fp32(x*x + y*y + z*z);
    d.q1 = to_fp32(urand(-1.0, 1.0));
    d.q2 = to_fp32(urand(-1.0, 1.0));
    return d;
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      dist_t d;
      real   s, mag, r;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        d = exp_q.pop_front();
        pair_scalar(to_real(d.r2), to_real(d.q1), to_real(d.q2), A, B, KC, s, mag);
        r = $sqrt(to_real(d.r2));
        if (out_force.hidx != d.hidx ||
            !close(to_real(out_force.fx), s * to_real(d.dx), mag * r, 2.0e-5) ||
            !close(to_real(out_force.fy), s * to_real(d.dy), mag * r, 2.0e-5) ||
            !close(to_real(out_force.fz), s * to_real(d.dz), mag * r, 2.0e-5)) begin
          failures++;
          $display("mismatch hidx=%0d: fx=%g exp %g", out_force.hidx,
                   to_real(out_force.fx), s * to_real(d.dx));
        end
      end
    end
  end

  task automatic send(dist_t d);
    in_valid <= 1'b1;
    in_dist  <= d;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    acc_cycle = cycle;
    in_count++;
    exp_q.push_back(d);
  endtask

  initial begin
    int t0, lat;
    lj_a      = to_fp32(A);
    lj_b      = to_fp32(B);
    k_coul    = to_fp32(KC);
    in_valid  = 1'b0;
    in_dist   = '0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    send(make_dist(0));
    in_valid <= 1'b0;
    t0 = acc_cycle;
    while (!out_valid) @(posedge clk);
    lat = cycle - t0;
    checks++;
    if (lat != 14) begin failures++; $display("latency %0d, expected 14", lat); end
    @(posedge clk);

    t0 = cycle;
    for (int n = 1; n <= 400; n++) send(make_dist(n));
    in_valid <= 1'b0;
    checks++;
    if (cycle - t0 != 400) begin
      failures++;
      $display("rate: 400 pairs took %0d cycles", cycle - t0);
    end

    fork
      begin
        for (int n = 401; n < 1000; n++) begin
          if ($urandom_range(3) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
          send(make_dist(n));
        end
        in_valid <= 1'b0;
      end
      begin
        forever begin
          out_ready <= ($urandom_range(2) != 0);
          @(posedge clk);
        end
      end
    join_any
    disable fork;
    in_valid <= 1'b0;
    out_ready <= 1'b1;
    while (exp_q.size() != 0 || busy) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (in_count != 1000) begin failures++; $display("sent %0d", in_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
