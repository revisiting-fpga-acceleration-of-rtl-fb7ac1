// md_distance_calc_tb: self-checking test of the distance calculator.
//
// Random pairs around a home atom (some inside, some outside the cutoff,
// plus self-pairs at distance 0) are sent; a double-precision model decides
// which must come out and with which dx, dy, dz, r2. Checks: the filter
// decision, the values and the order of the forwarded pairs, a latency of 4
// cycles, a sustained rate of one pair accepted per cycle, and correct
// holding of outputs under random backpressure.
module md_distance_calc_tb;
  import md_pkg::*;
  import md_tb_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  fp32_t cutoff2;
  logic  in_valid, in_ready, out_valid, out_ready, busy, rejected;
  pair_t in_pair;
  dist_t out_dist;

  int checks = 0, failures = 0;
  int cycle = 0;

  md_distance_calc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pair_t exp_q[$];
  int    n_pass = 0, n_rej_exp = 0, n_rej_seen = 0;
  int    in_count = 0;
  int    acc_cycle = 0;
  const real RC2 = 1.44;

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  function automatic pair_t make_pair(int n);
    pair_t p;
    real hx, hy, hz, r2;
    p.hidx   = HIDX_W'(n);
    hx = urand(-2.0, 2.0); hy = urand(-2.0, 2.0); hz = urand(-2.0, 2.0);
    p.home.x = to_fp32(hx); p.home.y = to_fp32(hy); p.home.z = to_fp32(hz);
    p.home.q = to_fp32(urand(-1.0, 1.0));
    p.nbr.q  = to_fp32(urand(-1.0, 1.0));
    if (n % 17 == 5) begin
      p.nbr.x = p.home.x; p.nbr.y = p.home.y; p.nbr.z = p.home.z;   // self-pair
    end else begin
      do begin
        p.nbr.x = to_fp32(hx + urand(-2.0, 2.0));
        p.nbr.y = to_fp32(hy + urand(-2.0, 2.0));
        p.nbr.z = to_fp32(hz + urand(-2.0, 2.0));
        r2 = ref_r2(p);
      end while (rabs(r2 - RC2) < 1.0e-4);
    end
    return p;
  endfunction

  function automatic real ref_r2(pair_t p);
    real dx, dy, dz;
    dx = to_real(p.home.x) - to_real(p.nbr.x);
    dy = to_real(p.home.y) - to_real(p.nbr.y);
    dz = to_real(p.home.z) - to_real(p.nbr.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  // scoreboard on the output side
  always @(posedge clk) begin
    if (rst_n && rejected) n_rej_seen++;
    if (rst_n && out_valid && out_ready) begin
      pair_t p;
      real   r2;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output hidx=%0d", out_dist.hidx);
      end else begin
        p  = exp_q.pop_front();
        r2 = ref_r2(p);
        if (out_dist.hidx != p.hidx || out_dist.q1 != p.home.q || out_dist.q2 != p.nbr.q ||
            !close(to_real(out_dist.r2), r2, r2, 1.0e-6) ||
            !close(to_real(out_dist.dx), to_real(p.home.x) - to_real(p.nbr.x), 4.0, 1.0e-6) ||
            !close(to_real(out_dist.dy), to_real(p.home.y) - to_real(p.nbr.y), 4.0, 1.0e-6) ||
            !close(to_real(out_dist.dz), to_real(p.home.z) - to_real(p.nbr.z), 4.0, 1.0e-6)) begin
          failures++;
          $display("mismatch hidx=%0d (exp %0d) r2=%f exp %f", out_dist.hidx, p.hidx,
                   to_real(out_dist.r2), r2);
        end
      end
    end
  end

  task automatic send(pair_t p);
    real r2;
    in_valid <= 1'b1;
    in_pair  <= p;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    acc_cycle = cycle;      // in_valid stays high; the caller drops it
    in_count++;
    r2 = ref_r2(p);
    if (r2 < RC2 && r2 > 0.0) begin
      exp_q.push_back(p);
      n_pass++;
    end else n_rej_exp++;
  endtask

  initial begin
    int t0, lat, n0;
    cutoff2   = to_fp32(RC2);
    in_valid  = 1'b0;
    in_pair   = '0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // latency of one passing pair
    begin
      pair_t p;
      do p = make_pair(1); while (!(ref_r2(p) < RC2 && ref_r2(p) > 0.0));
      send(p);
      in_valid <= 1'b0;
      t0 = acc_cycle;
      while (!out_valid) @(posedge clk);
      lat = cycle - t0;
      checks++;
      if (lat != 4) begin failures++; $display("latency %0d, expected 4", lat); end
      @(posedge clk);
    end

    // back-to-back stream, no backpressure: one pair accepted per cycle
    t0 = cycle;
    n0 = in_count;
    for (int n = 0; n < 300; n++) send(make_pair(n));
    in_valid <= 1'b0;
    checks++;
    if (cycle - t0 != in_count - n0) begin
      failures++;
      $display("rate: %0d pairs took %0d cycles", in_count - n0, cycle - t0);
    end

    // random backpressure and gaps
    fork
      begin
        for (int n = 300; n < 900; n++) begin
          if ($urandom_range(3) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
          send(make_pair(n));
        end
        in_valid <= 1'b0;
      end
      begin
        repeat (3000) begin
          out_ready <= ($urandom_range(2) != 0);
          @(posedge clk);
        end
      end
    join_any
    disable fork;
    in_valid <= 1'b0;
    while (exp_q.size() != 0 || busy) begin
      out_ready <= 1'b1;
      @(posedge clk);
    end
    repeat (2) @(posedge clk);

    checks++;
    if (n_rej_seen != n_rej_exp) begin
      failures++;
      $display("rejected pairs %0d, expected %0d", n_rej_seen, n_rej_exp);
    end
    checks++;
    if (n_pass == 0 || n_rej_exp == 0) begin
      failures++;
      $display("stimulus did not exercise both outcomes");
    end
    $display("pairs in=%0d passed=%0d rejected=%0d", in_count, n_pass, n_rej_exp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
