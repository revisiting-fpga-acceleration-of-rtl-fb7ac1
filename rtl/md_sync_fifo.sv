// md_sync_fifo: single-clock first-in first-out queue.
//
// DEPTH entries of type T held in a register array with read and write
// pointers and an occupancy counter. Push and pop may happen in the same
// cycle, also when the queue is full (the pop frees the slot the push takes).
// The head entry is visible on rd_data whenever !empty (first-word
// fall-through), so a pushed word can be popped one cycle after the push.
// Overflow and underflow are guarded by the full/empty flags and checked by
// assertions.
module md_sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  output logic full,
  input  logic pop,
  output T     rd_data,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   wp, rp;
  logic            do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem[wp] <= wr_data;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
