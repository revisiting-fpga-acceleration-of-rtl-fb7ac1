// md_prefetch_stream_tb: self-checking test of the prefetch and streaming
// unit on its own.
//
// Atoms are tagged instead of placed: an atom's x field holds its global
// index, so every streamed pair names exactly which two atoms it pairs.
// The unit runs as copy 1 of 2 (home cells 1, 3, 5, ...) over a 3 x 2 x 2
// grid with MAX_ATOMS = 16, one cell holding 20 atoms (truncated to 16 and
// flagged), one empty cell. The K = 4 lanes see random ready.
// A stand-in for the downstream pipeline delays each pair by 7 cycles,
// raises pipe_busy meanwhile, and then counts it per home slot, playing the
// force accumulator; the unit must wait for it before writing back.
// Checks: each expected (home atom, neighbor atom) pair arrives exactly
// once, lane k carries slot g*K + k, the home slot matches the atom, no
// unexpected pair, write-back addresses and values (the per-slot pair
// count, which shows nothing was written back before the pipeline drained),
// the overflow flag, and that stalls and out-of-grid skips happened.
module md_prefetch_stream_tb;
  import md_pkg::*;

  localparam int K = 4, MAXA = 16;
  localparam int NX = 3, NY = 2, NZ = 2, NCELL = NX * NY * NZ;
  localparam int CELL_BASE = 0, ATOM_BASE = 100, FORCE_BASE = 1000, WORDS = 2048;
  localparam int DELAY = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, done;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  atom_t mem_rsp_data;
  logic  [K-1:0] out_valid, out_ready;
  pair_t [K-1:0] out_pair;
  logic pipe_busy, acc_clear, stall, skip_nb, cell_overflow;
  logic [$clog2(MAXA)-1:0] acc_rd_idx;
  force_t acc_rd_force;

  int checks = 0, failures = 0;

  md_prefetch_stream #(.K(K), .MAX_ATOMS(MAXA), .CELL_W(8)) dut (
    .clk, .rst_n, .start, .done,
    .cell_base(32'(CELL_BASE)), .atom_base(32'(ATOM_BASE)), .force_base(32'(FORCE_BASE)),
    .nx(8'(NX)), .ny(8'(NY)), .nz(8'(NZ)),
    .first_cell(32'd1), .cell_stride(32'd2),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
    .out_valid, .out_ready, .out_pair, .pipe_busy,
    .acc_clear, .acc_rd_idx, .acc_rd_force,
    .stall, .skip_nb, .cell_overflow
  );

  md_mem_model #(.NPORTS(1), .WORDS(WORDS), .LATENCY(4), .READY_PCT(70)) u_mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cstart [NCELL], ccount [NCELL], acell [1024];
  int natoms = 0;
  int expected [int];     // key home_id * 4096 + nbr_id -> outstanding count
  int n_pairs_exp = 0, n_pairs = 0, n_stall = 0, n_skip = 0;

  // downstream stand-in: delay line and per-slot counters
  int delay_q [$];
  int delay_t [$];
  int slot_cnt [MAXA];
  int tnow = 0;

  assign pipe_busy = (delay_q.size() != 0);
  always_comb begin
    acc_rd_force    = '0;
    acc_rd_force.fx = 32'(slot_cnt[acc_rd_idx]);
    acc_rd_force.fy = 32'hABCD_0000 | 32'(acc_rd_idx);
  end

  always @(posedge clk) begin
    tnow <= tnow + 1;
    if (rst_n) begin
      for (int k = 0; k < K; k++) out_ready[k] <= ($urandom_range(4) != 0);
      if (stall) n_stall++;
      if (skip_nb) n_skip++;
      if (delay_q.size() != 0 && delay_t[0] <= tnow) begin
        slot_cnt[delay_q[0]]++;
        void'(delay_q.pop_front());
        void'(delay_t.pop_front());
      end
      if (acc_clear) for (int i = 0; i < MAXA; i++) slot_cnt[i] = 0;
      for (int k = 0; k < K; k++) begin
        if (out_valid[k] && out_ready[k]) begin
          int h, j, key;
          h = int'(out_pair[k].home.x);
          j = int'(out_pair[k].nbr.x);
          key = h * 4096 + j;
          n_pairs++;
          checks++;
          if (!expected.exists(key) || expected[key] == 0 ||
              int'(out_pair[k].hidx) != h - cstart[acell[h]] ||
              int'(out_pair[k].hidx) % K != k) begin
            failures++;
            $display("unexpected pair home %0d nbr %0d slot %0d lane %0d", h, j,
                     out_pair[k].hidx, k);
          end else expected[key]--;
          delay_q.push_back(int'(out_pair[k].hidx));
          delay_t.push_back(tnow + DELAY);
        end
      end
    end
  end

  initial begin
    atom_t w;
    int nb_total [MAXA];
    out_ready = '0;
    start = 1'b0;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    for (int c = 0; c < NCELL; c++) begin
      cstart[c] = natoms;
      ccount[c] = (c == 3) ? 20 : (c == 5) ? 0 : 1 + $urandom_range(9);
      for (int i = 0; i < ccount[c]; i++) begin
        w = '0;
        w.x = 32'(natoms);
        w.y = 32'(c);
        u_mem.mem[ATOM_BASE + natoms] = w;
        u_mem.mem[FORCE_BASE + natoms] = '1;
        acell[natoms] = c;
        natoms++;
      end
      w = '0;
      w.q = 32'(cstart[c]);
      w.z = 32'(ccount[c]);
      u_mem.mem[CELL_BASE + c] = w;
    end
    // expected pairs for the home cells of copy 1
    for (int h = 1; h < NCELL; h += 2) begin
      int hx, hy, hz;
      hx = h % NX; hy = (h / NX) % NY; hz = h / (NX * NY);
      for (int n = 0; n < NCELL; n++) begin
        int x, y, z;
        x = n % NX; y = (n / NX) % NY; z = n / (NX * NY);
        if (x - hx > 1 || hx - x > 1 || y - hy > 1 || hy - y > 1 || z - hz > 1 || hz - z > 1)
          continue;
        for (int i = 0; i < ccount[h] && i < MAXA; i++)
          for (int j = 0; j < ccount[n] && j < MAXA; j++) begin
            expected[(cstart[h] + i) * 4096 + cstart[n] + j] = 1;
            n_pairs_exp++;
          end
      end
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    @(posedge clk);
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);

    checks++;
    if (n_pairs != n_pairs_exp) begin
      failures++;
      $display("pairs streamed %0d, expected %0d", n_pairs, n_pairs_exp);
    end
    // write-back: per-slot pair counts for copy 1's cells, untouched elsewhere
    for (int c = 0; c < NCELL; c++) begin
      int hx, hy, hz, nbt;
      hx = c % NX; hy = (c / NX) % NY; hz = c / (NX * NY);
      nbt = 0;
      for (int n = 0; n < NCELL; n++) begin
        int x, y, z;
        x = n % NX; y = (n / NX) % NY; z = n / (NX * NY);
        if (x - hx > 1 || hx - x > 1 || y - hy > 1 || hy - y > 1 || z - hz > 1 || hz - z > 1)
          continue;
        nbt += (ccount[n] < MAXA) ? ccount[n] : MAXA;
      end
      for (int i = 0; i < ccount[c]; i++) begin
        w = u_mem.mem[FORCE_BASE + cstart[c] + i];
        checks++;
        if (c % 2 == 1 && i < MAXA) begin
          if (int'(w.x) != nbt || w.y != (32'hABCD_0000 | 32'(i)) || w.q != 0) begin
            failures++;
            $display("cell %0d slot %0d: written %0d, expected %0d", c, i, w.x, nbt);
          end
        end else if (w != '1) begin
          failures++;
          $display("cell %0d slot %0d written but not owned by this copy", c, i);
        end
      end
    end
    checks++;
    if (!cell_overflow) begin failures++; $display("overflow not flagged"); end
    checks++;
    if (n_stall == 0 || n_skip == 0 || u_mem.req_stalls == 0) begin
      failures++;
      $display("stalls %0d skips %0d memory stalls %0d", n_stall, n_skip, u_mem.req_stalls);
    end
    $display("pairs=%0d stalls=%0d skips=%0d", n_pairs, n_stall, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
