// md_merge_fifo: the "FIFO merge" that joins K distance-calculator streams
// into the queue of one force computation PE.
//
// Each input is a valid/ready stream of in-cutoff pairs. Because each
// distance calculator emits a pair only when the pair passes the cutoff test,
// the inputs are irregular; merging K of them is what keeps the single force
// pipeline busy. Every cycle a round-robin arbiter grants one valid input
// (the search starts one past the last granted input) and pushes its pair
// into a DEPTH-entry queue, as long as the queue is not full; the other valid
// inputs wait (their ready is low). The queue's head drives the output
// stream, which the force pipeline pops at up to one pair per cycle.
//
// One push per cycle matches the consumer's rate of one pair per cycle; a
// K-wide push is not needed for throughput. The arbitration policy and DEPTH
// are this design's choices.
// Timing: a granted input appears at the output one cycle later.
// contention pulses when more than one input is valid in a cycle.
module md_merge_fifo
  import md_pkg::*;
#(
  parameter int unsigned K     = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic  [K-1:0] in_valid,
  output logic  [K-1:0] in_ready,
  input  dist_t [K-1:0] in_dist,
  output logic          out_valid,
  input  logic          out_ready,
  output dist_t         out_dist,
  output logic          busy,
  output logic          contention,
  output logic          full
);

  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  logic [KW-1:0] last, sel;
  logic          any;
  logic          empty;
  logic [$clog2(DEPTH+1)-1:0] count;

  // round-robin choice starting after the last grant
  always_comb begin
    sel = last;
    any = 1'b0;
    for (int unsigned d = 1; d <= K; d++) begin
      automatic int unsigned idx = (int'(last) + d) % K;
      if (!any && in_valid[idx]) begin
        any = 1'b1;
        sel = KW'(idx);
      end
    end
  end

  always_comb begin
    in_ready = '0;
    if (any && !full) in_ready[sel] = 1'b1;
  end

  always_comb contention = ($countones(in_valid) > 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= KW'(K - 1);
    else if (any && !full) last <= sel;
  end

  md_sync_fifo #(.T(dist_t), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .push    (any && !full),
    .wr_data (in_dist[sel]),
    .full,
    .pop     (out_ready && !empty),
    .rd_data (out_dist),
    .empty,
    .count
  );

  assign out_valid = !empty;
  assign busy      = !empty;

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready));

endmodule
