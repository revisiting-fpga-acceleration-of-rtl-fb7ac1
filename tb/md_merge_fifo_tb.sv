// md_merge_fifo_tb: self-checking test of the K-input merging FIFO.
//
// K random producers offer tagged items with random gaps and hold each item
// until it is granted; the consumer pops with random backpressure. Checks:
// every item arrives exactly once, items of one producer keep their order,
// at most one input is granted per cycle, with all K inputs valid the
// grants rotate so each input is served once in K cycles, the output
// sustains one item per cycle, and the full flag stops grants.
module md_merge_fifo_tb;
  import md_pkg::*;

  localparam int K = 4;
  localparam int DEPTH = 8;
  localparam int N_PER = 200;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic  [K-1:0] in_valid, in_ready;
  dist_t [K-1:0] in_dist;
  logic          out_valid, out_ready, busy, contention, full;
  dist_t         out_dist;

  int checks = 0, failures = 0;
  int next_exp [K];
  int sent [K];
  int received = 0, n_contention = 0, n_full = 0;
  bit rr_phase = 0;
  int rr_grants [K];

  md_merge_fifo #(.K(K), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // item tag: producer in hidx[15:12], sequence number in hidx[11:0]
  always @(posedge clk) begin
    if (rst_n) begin
      if (contention) n_contention++;
      if (full) n_full++;
      checks++;
      if (!$onehot0(in_ready) || (full && in_ready != '0) || ((in_ready & ~in_valid) != '0)) begin
        failures++;
        $display("bad grant %b valid %b full %b", in_ready, in_valid, full);
      end
      if (rr_phase) for (int k = 0; k < K; k++) if (in_ready[k]) rr_grants[k]++;
      if (out_valid && out_ready) begin
        int p, sq;
        p  = int'(out_dist.hidx[15:12]);
        sq = int'(out_dist.hidx[11:0]);
        checks++;
        if (p >= K || sq != next_exp[p] || out_dist.r2 != 32'(p * 4096 + sq)) begin
          failures++;
          $display("out of order: producer %0d seq %0d expected %0d", p, sq, next_exp[p]);
        end else next_exp[p]++;
        received++;
      end
    end
  end

  for (genvar k = 0; k < K; k++) begin : g_prod
    initial begin
      in_valid[k] = 1'b0;
      in_dist[k]  = '0;
      sent[k]     = 0;
      next_exp[k] = 0;
      rr_grants[k] = 0;
      wait (rst_n);
      @(posedge clk);
      // phase 1: all producers always valid, consumer always ready
      for (int n = 0; n < 40; n++) begin
        in_valid[k] <= 1'b1;
        in_dist[k].hidx <= HIDX_W'(k * 4096 + n);
        in_dist[k].r2   <= 32'(k * 4096 + n);
        @(posedge clk);
        while (!in_ready[k]) @(posedge clk);
      end
      in_valid[k] <= 1'b0;
      @(posedge clk);
      wait (rr_phase == 0);
      // phase 2: random gaps
      for (int n = 40; n < N_PER; n++) begin
        if ($urandom_range(2) == 0) begin
          in_valid[k] <= 1'b0;
          @(posedge clk);
        end
        in_valid[k] <= 1'b1;
        in_dist[k].hidx <= HIDX_W'(k * 4096 + n);
        in_dist[k].r2   <= 32'(k * 4096 + n);
        @(posedge clk);
        while (!in_ready[k]) @(posedge clk);
      end
      in_valid[k] <= 1'b0;
      sent[k] = N_PER;
    end
  end

  initial begin
    int t0, r0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // phase 1: measure rotation and rate over 32 fully loaded cycles
    repeat (4) @(posedge clk);
    rr_phase = 1;
    r0 = received;
    repeat (32) @(posedge clk);
    rr_phase = 0;
    checks++;
    for (int k = 0; k < K; k++)
      if (rr_grants[k] != 32 / K) begin
        failures++;
        $display("input %0d granted %0d times in 32 cycles", k, rr_grants[k]);
      end
    checks++;
    if (received - r0 != 32) begin
      failures++;
      $display("output rate: %0d items in 32 cycles", received - r0);
    end
    // phase 2: random backpressure, enough to fill the queue
    t0 = 0;
    while (received < K * N_PER && t0 < 20000) begin
      out_ready <= ($urandom_range(3) == 0);
      @(posedge clk);
      t0++;
    end
    out_ready <= 1'b1;
    repeat (5) @(posedge clk);
    checks++;
    if (received != K * N_PER) begin
      failures++;
      $display("received %0d of %0d", received, K * N_PER);
    end
    checks++;
    if (n_full == 0 || n_contention == 0) begin
      failures++;
      $display("queue never full (%0d) or no contention (%0d)", n_full, n_contention);
    end
    $display("received=%0d contention_cycles=%0d full_cycles=%0d", received, n_contention, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
