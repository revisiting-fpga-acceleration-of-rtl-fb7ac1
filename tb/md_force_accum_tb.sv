// md_force_accum_tb: self-checking test of the per-home-atom force sums.
//
// Streams random forces, one per cycle, into random slots (with runs of
// back-to-back forces to the same slot, the read-modify-write hazard case),
// and compares every slot with a double-precision running sum, within
// 1e-6 of the summed magnitudes per added term. Then checks that clear
// zeroes every slot and takes precedence over a simultaneous add.
module md_force_accum_tb;
  import md_pkg::*;
  import md_tb_pkg::*;

  localparam int N = 64;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   clear, in_valid;
  force_t in_force;
  logic [$clog2(N)-1:0] rd_idx;
  force_t rd_force;

  int  checks = 0, failures = 0;
  real sx [N], sy [N], sz [N], mag [N];
  int  cnt [N];

  md_force_accum #(.MAX_ATOMS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  task automatic check_all(string what);
    for (int i = 0; i < N; i++) begin
      rd_idx = ($clog2(N))'(i);
      #1;
      checks++;
      if (!close(to_real(rd_force.fx), sx[i], mag[i], 1.0e-6 * (cnt[i] + 1)) ||
          !close(to_real(rd_force.fy), sy[i], mag[i], 1.0e-6 * (cnt[i] + 1)) ||
          !close(to_real(rd_force.fz), sz[i], mag[i], 1.0e-6 * (cnt[i] + 1))) begin
        failures++;
        $display("%s: slot %0d fx=%g exp %g", what, i, to_real(rd_force.fx), sx[i]);
      end
    end
  endtask

  initial begin
    int slot;
    real fx, fy, fz;
    clear = 1'b0; in_valid = 1'b0; in_force = '0; rd_idx = '0;
    for (int i = 0; i < N; i++) begin sx[i] = 0; sy[i] = 0; sz[i] = 0; mag[i] = 0; cnt[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check_all("after reset");
    slot = 0;
    for (int n = 0; n < 2000; n++) begin
      if ($urandom_range(3) != 0) slot = $urandom_range(N - 1);   // else repeat the slot
      fx = urand(-100.0, 100.0); fy = urand(-1.0, 1.0); fz = urand(-1.0e4, 1.0e4);
      in_force.hidx <= HIDX_W'(slot);
      in_force.fx <= to_fp32(fx); in_force.fy <= to_fp32(fy); in_force.fz <= to_fp32(fz);
      in_valid <= 1'b1;
      sx[slot] += to_real(to_fp32(fx));
      sy[slot] += to_real(to_fp32(fy));
      sz[slot] += to_real(to_fp32(fz));
      mag[slot] += rabs(fx) + rabs(fy) + rabs(fz);
      cnt[slot]++;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    @(posedge clk);
    check_all("sums");
    // clear together with an add: every slot must read zero afterwards
    clear <= 1'b1;
    in_valid <= 1'b1;
    in_force.hidx <= 5;
    in_force.fx <= to_fp32(1.0);
    @(posedge clk);
    clear <= 1'b0;
    in_valid <= 1'b0;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin sx[i] = 0; sy[i] = 0; sz[i] = 0; mag[i] = 0; cnt[i] = 0; end
    check_all("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
