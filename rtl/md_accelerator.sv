// md_accelerator: short-range non-bonded force accelerator with a
// multi-producer, single-consumer data flow.
//
// The chip computes, for every atom, the sum of Lennard-Jones and Coulomb
// forces from all atoms within the cutoff radius, using a cell list (cells
// about one cutoff wide, each atom interacting only with the 27 cells around
// its own). The distance test passes only a minority of the candidate pairs,
// so one distance calculator cannot keep a force pipeline busy. This top
// level therefore feeds each force computation PE from K = NUM_PE0/NUM_PE1
// distance calculators through a merging FIFO:
//
//   prefetch/stream c --K pairs/cycle--> PE0 (c*K) .. PE0 (c*K+K-1)
//        |                                  | in-cutoff pairs only
//        |                              FIFO merge c (round robin + queue)
//        |                                  |
//        |                              PE1 c (force pipeline, 1 pair/cycle)
//        |                                  |
//        +--- write-back <--------------- force accumulator c
//
// for c = 0 .. NUM_PE1-1 (the generate loops PE0, PE1 and FIFO follow the
// template of the paper's top-level module; prefetch and accumulator loops
// are added here). Defaults: NUM_PE0 = 8, NUM_PE1 = 2, i.e. two copies of a
// 4-to-1 force pipeline, the configuration of one FPGA of the final design.
// Each copy has its own memory port and takes every NUM_PE1-th home cell.
//
// Interface: pulse start with the grid (nx, ny, nz), base addresses, squared
// cutoff and force constants stable; done rises when every copy has written
// back all its home cells and stays high until the next start. Memory ports
// carry one 128-bit word per request; see md_prefetch_stream for the layout.
// Status outputs (per copy) expose the data-flow events for monitoring.
module md_accelerator
  import md_pkg::*;
#(
  parameter int unsigned NUM_PE0    = 8,
  parameter int unsigned NUM_PE1    = 2,
  parameter int unsigned MAX_ATOMS  = 256,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned CELL_W     = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    done,
  input  logic [CELL_W-1:0]       nx,
  input  logic [CELL_W-1:0]       ny,
  input  logic [CELL_W-1:0]       nz,
  input  logic [ADDR_W-1:0]       cell_base,
  input  logic [ADDR_W-1:0]       atom_base,
  input  logic [ADDR_W-1:0]       force_base,
  input  fp32_t                   cutoff2,
  input  fp32_t                   lj_a,
  input  fp32_t                   lj_b,
  input  fp32_t                   k_coul,
  // one memory port per copy
  output logic     [NUM_PE1-1:0]  mem_req_valid,
  input  logic     [NUM_PE1-1:0]  mem_req_ready,
  output mem_req_t [NUM_PE1-1:0]  mem_req,
  input  logic     [NUM_PE1-1:0]  mem_rsp_valid,
  input  atom_t    [NUM_PE1-1:0]  mem_rsp_data,
  // status, per copy
  output logic     [NUM_PE1-1:0]  stat_stall,       // streamer waiting on a PE0
  output logic     [NUM_PE1-1:0]  stat_merge_busy,  // >1 PE0 offering at the merge
  output logic     [NUM_PE1-1:0]  stat_queue_full,
  output logic     [NUM_PE1-1:0]  stat_force_valid, // PE1 produced a pair force
  output logic     [NUM_PE1-1:0]  stat_cell_overflow,
  output logic     [NUM_PE1-1:0]  stat_skip_nb,     // neighbor cell outside the grid
  output logic     [NUM_PE0-1:0]  stat_rejected     // PE0 dropped a pair (outside cutoff)
);

  // K: the number of PE0s that feeds a PE1
  localparam int unsigned K = NUM_PE0 / NUM_PE1;

  pair_t  [NUM_PE0-1:0] pair;
  logic   [NUM_PE0-1:0] pair_valid, pair_ready;
  dist_t  [NUM_PE0-1:0] pe0_dist;
  logic   [NUM_PE0-1:0] dist_valid, dist_ready, pe0_busy;
  dist_t  [NUM_PE1-1:0] q_dist;
  logic   [NUM_PE1-1:0] q_valid, q_ready, q_busy;
  force_t [NUM_PE1-1:0] frc;
  logic   [NUM_PE1-1:0] frc_valid, pe1_busy, copy_done;
  logic   [NUM_PE1-1:0] acc_clear;
  force_t [NUM_PE1-1:0] acc_rd_force;
  logic   [NUM_PE1-1:0][$clog2(MAX_ATOMS)-1:0] acc_rd_idx;

  // generate PE0s: distance calculators
  for (genvar i = 0; i < NUM_PE0; i++) begin : PE0
    md_distance_calc u_pe0 (
      .clk, .rst_n, .cutoff2,
      .in_valid  (pair_valid[i]),
      .in_ready  (pair_ready[i]),
      .in_pair   (pair[i]),
      .out_valid (dist_valid[i]),
      .out_ready (dist_ready[i]),
      .out_dist  (pe0_dist[i]),
      .busy      (pe0_busy[i]),
      .rejected  (stat_rejected[i])
    );
  end

  // generate PE1s: force computation pipelines, each with its accumulator
  for (genvar i = 0; i < NUM_PE1; i++) begin : PE1
    md_force_compute u_pe1 (
      .clk, .rst_n, .lj_a, .lj_b, .k_coul,
      .in_valid  (q_valid[i]),
      .in_ready  (q_ready[i]),
      .in_dist   (q_dist[i]),
      .out_valid (frc_valid[i]),
      .out_ready (1'b1),
      .out_force (frc[i]),
      .busy      (pe1_busy[i])
    );

    md_force_accum #(.MAX_ATOMS(MAX_ATOMS)) u_acc (
      .clk, .rst_n,
      .clear    (acc_clear[i]),
      .in_valid (frc_valid[i]),
      .in_force (frc[i]),
      .rd_idx   (acc_rd_idx[i]),
      .rd_force (acc_rd_force[i])
    );
    assign stat_force_valid[i] = frc_valid[i];
  end

  // generate FIFOs: ports from i*K to (i+1)*K PE0s, ports to the i-th PE1
  for (genvar i = 0; i < NUM_PE1; i++) begin : FIFO
    md_merge_fifo #(.K(K), .DEPTH(FIFO_DEPTH)) u_merge (
      .clk, .rst_n,
      .in_valid   (dist_valid[i*K +: K]),
      .in_ready   (dist_ready[i*K +: K]),
      .in_dist    (pe0_dist[i*K +: K]),
      .out_valid  (q_valid[i]),
      .out_ready  (q_ready[i]),
      .out_dist   (q_dist[i]),
      .busy       (q_busy[i]),
      .contention (stat_merge_busy[i]),
      .full       (stat_queue_full[i])
    );
  end

  // generate prefetch + streaming units, one per copy
  for (genvar i = 0; i < NUM_PE1; i++) begin : PF
    md_prefetch_stream #(.K(K), .MAX_ATOMS(MAX_ATOMS), .CELL_W(CELL_W)) u_pf (
      .clk, .rst_n, .start,
      .done          (copy_done[i]),
      .cell_base, .atom_base, .force_base,
      .nx, .ny, .nz,
      .first_cell    (ADDR_W'(i)),
      .cell_stride   (ADDR_W'(NUM_PE1)),
      .mem_req_valid (mem_req_valid[i]),
      .mem_req_ready (mem_req_ready[i]),
      .mem_req       (mem_req[i]),
      .mem_rsp_valid (mem_rsp_valid[i]),
      .mem_rsp_data  (mem_rsp_data[i]),
      .out_valid     (pair_valid[i*K +: K]),
      .out_ready     (pair_ready[i*K +: K]),
      .out_pair      (pair[i*K +: K]),
      .pipe_busy     ((|pe0_busy[i*K +: K]) || q_busy[i] || pe1_busy[i]),
      .acc_clear     (acc_clear[i]),
      .acc_rd_idx    (acc_rd_idx[i]),
      .acc_rd_force  (acc_rd_force[i]),
      .stall         (stat_stall[i]),
      .skip_nb       (stat_skip_nb[i]),
      .cell_overflow (stat_cell_overflow[i])
    );
  end

  assign done = &copy_done;

  initial begin
    assert (NUM_PE0 % NUM_PE1 == 0 && K > 0)
      else $error("NUM_PE0 must be a non-zero multiple of NUM_PE1");
  end

endmodule
