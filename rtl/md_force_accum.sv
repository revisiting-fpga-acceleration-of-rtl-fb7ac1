// md_force_accum: per-home-atom force accumulator.
//
// Holds one force vector (fx, fy, fz) for each of the MAX_ATOMS slots of the
// current home cell. Each pair force that leaves the force pipeline is added,
// in single precision, to the slot named by its home index: a read, three
// adds and a write in the same cycle, so back-to-back forces to the same slot
// need no forwarding and the block accepts one force every cycle. This is the
// running "total force" of every home atom; its storage and the way it is
// cleared are this design's choices.
// clear sets every slot to +0.0 in one cycle (before a new home cell starts);
// it takes precedence over an add in the same cycle.
// rd_idx / rd_force is a combinational read port used to write the totals
// back to memory once all pairs of the home cell have been resolved.
// rd_force.hidx just echoes rd_idx (upper bits zero) so the read port
// carries the same force_t as the input; those bits are constant by design.
module md_force_accum
  import md_pkg::*;
#(
  parameter int unsigned MAX_ATOMS = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  force_t in_force,
  input  logic [$clog2(MAX_ATOMS)-1:0] rd_idx,
  output force_t rd_force
);

  localparam int unsigned IW = $clog2(MAX_ATOMS);

  fp32_t acc_x [MAX_ATOMS];
  fp32_t acc_y [MAX_ATOMS];
  fp32_t acc_z [MAX_ATOMS];
  logic [IW-1:0] wi;

  assign wi = in_force.hidx[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_ATOMS; i++) begin
        acc_x[i] <= FP_ZERO;
        acc_y[i] <= FP_ZERO;
        acc_z[i] <= FP_ZERO;
      end
    end else if (clear) begin
      for (int i = 0; i < MAX_ATOMS; i++) begin
        acc_x[i] <= FP_ZERO;
        acc_y[i] <= FP_ZERO;
        acc_z[i] <= FP_ZERO;
      end
    end else if (in_valid) begin
      acc_x[wi] <= fp_add(acc_x[wi], in_force.fx);
      acc_y[wi] <= fp_add(acc_y[wi], in_force.fy);
      acc_z[wi] <= fp_add(acc_z[wi], in_force.fz);
    end
  end

  always_comb begin
    rd_force.hidx = HIDX_W'(rd_idx);
    rd_force.fx   = acc_x[rd_idx];
    rd_force.fy   = acc_y[rd_idx];
    rd_force.fz   = acc_z[rd_idx];
  end

  a_slot_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    in_valid |-> in_force.hidx < HIDX_W'(MAX_ATOMS));

endmodule
