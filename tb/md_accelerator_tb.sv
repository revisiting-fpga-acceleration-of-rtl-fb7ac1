// md_accelerator_tb: end-to-end test of the accelerator at its default size
// (NUM_PE0 = 8 distance calculators, NUM_PE1 = 2 force pipelines).
//
// Builds a small molecular system in a behavioural memory: a 3 x 3 x 2 grid
// of cells whose edge equals the cutoff radius, atoms placed on a jittered
// sub-lattice inside each cell (so no two atoms get closer than about 0.24,
// keeping the r^-14 term finite), random charges, one empty cell and some
// cells with more atoms than a lane group. It runs one full force pass and
// compares every written-back force with a double-precision cell-list
// reference (same neighbor rule: the 27 surrounding cells, no wrap-around,
// pairs with 0 < r^2 < rc^2).
// It also counts the data-flow events the design is built around and fails
// if one never happened: pairs dropped by the cutoff test, merge contention
// (several distance calculators offering at once), streamer stalls,
// memory request backpressure, out-of-grid neighbor cells, empty cells and
// home cells needing more than one lane group. The force pipelines'
// utilisation during the run is printed.
module md_accelerator_tb;
  import md_pkg::*;
  import md_tb_pkg::*;

  localparam int NPE0 = 8, NPE1 = 2, KL = NPE0 / NPE1;
  localparam int NX = 3, NY = 3, NZ = 2, NCELL = NX * NY * NZ;
  localparam int CELL_BASE = 0, ATOM_BASE = 256, FORCE_BASE = 2048, WORDS = 4096;
  localparam int MAXA = 600;
  localparam real L = 1.2, RC2 = 1.44, A = 1.0e-4, B = 2.0e-3, KC = 0.3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, done;
  logic     [NPE1-1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t [NPE1-1:0] mem_req;
  atom_t    [NPE1-1:0] mem_rsp_data;
  logic     [NPE1-1:0] stat_stall, stat_merge_busy, stat_queue_full, stat_force_valid;
  logic     [NPE1-1:0] stat_cell_overflow, stat_skip_nb;
  logic     [NPE0-1:0] stat_rejected;

  int checks = 0, failures = 0;
  int cycle = 0;

  md_accelerator dut (
    .clk, .rst_n, .start, .done,
    .nx(8'(NX)), .ny(8'(NY)), .nz(8'(NZ)),
    .cell_base(32'(CELL_BASE)), .atom_base(32'(ATOM_BASE)), .force_base(32'(FORCE_BASE)),
    .cutoff2(to_fp32(RC2)), .lj_a(to_fp32(A)), .lj_b(to_fp32(B)), .k_coul(to_fp32(KC)),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
    .stat_stall, .stat_merge_busy, .stat_queue_full, .stat_force_valid,
    .stat_cell_overflow, .stat_skip_nb, .stat_rejected
  );

  md_mem_model #(.NPORTS(NPE1), .WORDS(WORDS)) u_mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  int n_rej = 0, n_force = 0, n_merge = 0, n_stall = 0, n_skip = 0, n_busy_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    n_rej   += $countones(stat_rejected);
    n_force += $countones(stat_force_valid);
    n_merge += $countones(stat_merge_busy);
    n_stall += $countones(stat_stall);
    n_skip  += $countones(stat_skip_nb);
    if (!done) n_busy_cycles++;
  end

  // the system
  real ax [MAXA], ay [MAXA], az [MAXA], aq [MAXA];
  int  acell [MAXA];
  int  cstart [NCELL], ccount [NCELL];
  int  natoms = 0;

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  function automatic int cidx(int x, int y, int z);
    return (z * NY + y) * NX + x;
  endfunction

  initial begin
    int  n_empty = 0, n_multi = 0, exp_pairs = 0, t0, t1;
    atom_t w;
    start = 1'b0;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    // build cells: up to 27 sites per cell on a 3x3x3 sub-lattice
    for (int cz = 0; cz < NZ; cz++)
      for (int cy = 0; cy < NY; cy++)
        for (int cx = 0; cx < NX; cx++) begin
          int c, n;
          c = cidx(cx, cy, cz);
          cstart[c] = natoms;
          n = (c == 4) ? 0 : (c == 7) ? 27 : 4 + $urandom_range(14);
          for (int s = 0; s < 27 && n > 0; s++) begin
            if (c != 7 && $urandom_range(26) >= n) continue;
            ax[natoms] = to_real(to_fp32(cx * L + (s % 3) * 0.4 + 0.2 + urand(-0.08, 0.08)));
            ay[natoms] = to_real(to_fp32(cy * L + ((s / 3) % 3) * 0.4 + 0.2 + urand(-0.08, 0.08)));
            az[natoms] = to_real(to_fp32(cz * L + (s / 9) * 0.4 + 0.2 + urand(-0.08, 0.08)));
            aq[natoms] = to_real(to_fp32(urand(-1.0, 1.0)));
            acell[natoms] = c;
            natoms++;
          end
          ccount[c] = natoms - cstart[c];
          if (ccount[c] == 0) n_empty++;
          if (ccount[c] > KL) n_multi++;
          w = '0;
          w.q = 32'(cstart[c]);
          w.z = 32'(ccount[c]);
          u_mem.mem[CELL_BASE + c] = w;
        end
    for (int i = 0; i < natoms; i++) begin
      w.x = to_fp32(ax[i]); w.y = to_fp32(ay[i]); w.z = to_fp32(az[i]); w.q = to_fp32(aq[i]);
      u_mem.mem[ATOM_BASE + i] = w;
      u_mem.mem[FORCE_BASE + i] = '1;     // poison: must be overwritten
    end
    $display("system: %0d atoms in %0d cells (%0d empty, %0d with more than %0d atoms)",
             natoms, NCELL, n_empty, n_multi, KL);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = cycle;
    @(posedge clk);
    while (!done) @(posedge clk);
    t1 = cycle;

    // reference forces
    for (int i = 0; i < natoms; i++) begin
      real fx, fy, fz, scale, s, mag, dx, dy, dz, r2;
      int  hc, hx, hy, hz;
      fx = 0; fy = 0; fz = 0; scale = 0;
      hc = acell[i];
      hx = hc % NX; hy = (hc / NX) % NY; hz = hc / (NX * NY);
      for (int j = 0; j < natoms; j++) begin
        int jc, jx, jy, jz;
        jc = acell[j];
        jx = jc % NX; jy = (jc / NX) % NY; jz = jc / (NX * NY);
        if (jx - hx > 1 || hx - jx > 1 || jy - hy > 1 || hy - jy > 1 ||
            jz - hz > 1 || hz - jz > 1) continue;
        dx = ax[i] - ax[j]; dy = ay[i] - ay[j]; dz = az[i] - az[j];
        r2 = dx*dx + dy*dy + dz*dz;
        if (!(r2 < RC2 && r2 > 0.0)) continue;
        exp_pairs++;
        pair_scalar(r2, aq[i], aq[j], A, B, KC, s, mag);
        fx += s * dx; fy += s * dy; fz += s * dz;
        scale += mag * $sqrt(r2);
      end
      w = u_mem.mem[FORCE_BASE + i];
      checks++;
      if (!close(to_real(w.x), fx, scale, 1.0e-4) || !close(to_real(w.y), fy, scale, 1.0e-4) ||
          !close(to_real(w.z), fz, scale, 1.0e-4) || w.q != 32'd0) begin
        failures++;
        $display("atom %0d (cell %0d): got (%g %g %g) expected (%g %g %g)", i, hc,
                 to_real(w.x), to_real(w.y), to_real(w.z), fx, fy, fz);
      end
    end
    checks++;
    if (n_force != exp_pairs) begin
      failures++;
      $display("force pipelines produced %0d pair forces, expected %0d", n_force, exp_pairs);
    end
    checks++;
    if (u_mem.bad_addr != 0 || stat_cell_overflow != '0) begin
      failures++;
      $display("bad memory address or cell overflow");
    end

    // every data-flow mechanism must have happened
    if (n_rej == 0)    begin failures++; $display("no pair was dropped by the cutoff test"); end
    if (n_merge == 0)  begin failures++; $display("no merge contention"); end
    if (n_stall == 0)  begin failures++; $display("streamer never stalled"); end
    if (u_mem.req_stalls == 0) begin failures++; $display("no memory backpressure"); end
    if (n_skip == 0)   begin failures++; $display("no out-of-grid neighbor cell"); end
    if (n_empty == 0)  begin failures++; $display("no empty cell"); end
    if (n_multi == 0)  begin failures++; $display("no multi-group home cell"); end
    checks += 7;

    $display("run: %0d cycles, %0d candidate pairs dropped, %0d pair forces", t1 - t0, n_rej,
             n_force);
    $display("events: merge contention %0d, stream stalls %0d, memory stalls %0d, skipped cells %0d",
             n_merge, n_stall, u_mem.req_stalls, n_skip);
    $display("force pipeline utilisation %0d%% of run cycles (both copies)",
             (100 * n_force) / (NPE1 * (t1 - t0)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
