// md_prefetch_stream: data prefetching and streaming unit of one force
// pipeline copy.
//
// It walks the cell-list loop nest of the short-range force computation:
//   for each home cell (of this copy)
//     load the home cell's atoms into an on-chip buffer, clear the force sums
//     for each of the 3x3x3 neighbor cells (home cell included)
//       load the neighbor cell's atoms into an on-chip buffer
//       for each group of K home atoms
//         for each neighbor atom: send K pairs, one to each distance calculator
//     wait until every pair sent has been resolved, write the force sums back
// The neighbor cells are prefetched: two neighbor buffers are used in turn,
// and a loader fills one while the streamer sends pairs from the other, so
// the memory latency and load time of a neighbor cell hide behind the
// streaming of the previous one. Loading the home cell and writing back its
// sums are not overlapped. The block itself, its place in front of the
// distance calculators and the II-1 stream follow the paper; the two
// buffers, banking, lockstep lanes and memory layout are this design's own.
// The home buffer is split into K banks (home atom i lives in bank i mod K,
// row i div K), so the K home atoms of a group are latched in one cycle; the
// neighbor atom is broadcast to all K lanes. Lane k of group g therefore
// always carries home atom g*K + k.
//
// Memory (one port, 128-bit words, word addresses; this layout is this
// design's own, the paper leaves it open):
//   cell_base + c   cell-list entry of cell c = (cz*ny + cy)*nx + cx:
//                   bits [31:0] index of the cell's first atom, [63:32] count
//   atom_base + i   atom i: x, y, z, q as fp32 (atom_t), atoms sorted by cell
//   force_base + i  written: fx, fy, fz, 0 for atom i (the q word of a
//                   write request is a constant zero by design)
// Requests use valid/ready; read data returns in request order on
// mem_rsp_valid, one word per cycle at most, and is always accepted.
// Cells outside the nx*ny*nz grid are skipped (no periodic wrap-around).
// Home cells are shared among copies: this copy takes cells c with
// c mod cell_stride == first_cell.
//
// Pair streaming: the K lanes advance together. A pair is offered on every
// lane with a valid home atom only in a cycle where all those lanes are
// ready, so a lane never sees valid without its pair being taken. One group
// step per cycle when nothing stalls. pipe_busy (OR of the busy flags of the
// distance calculators, merge queue and force pipeline of this copy) tells
// when all pairs have been resolved before the write-back.
// Buffers are register arrays with combinational read. Cells holding more
// than MAX_ATOMS atoms are truncated and flagged on cell_overflow.
module md_prefetch_stream
  import md_pkg::*;
#(
  parameter int unsigned K         = 4,
  parameter int unsigned MAX_ATOMS = 256,
  parameter int unsigned CELL_W    = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  done,
  input  logic [ADDR_W-1:0]     cell_base,
  input  logic [ADDR_W-1:0]     atom_base,
  input  logic [ADDR_W-1:0]     force_base,
  input  logic [CELL_W-1:0]     nx,
  input  logic [CELL_W-1:0]     ny,
  input  logic [CELL_W-1:0]     nz,
  input  logic [ADDR_W-1:0]     first_cell,
  input  logic [ADDR_W-1:0]     cell_stride,
  // memory port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_rsp_valid,
  input  atom_t                 mem_rsp_data,
  // pair streams to the K distance calculators
  output logic  [K-1:0]         out_valid,
  input  logic  [K-1:0]         out_ready,
  output pair_t [K-1:0]         out_pair,
  input  logic                  pipe_busy,
  // force accumulator
  output logic                  acc_clear,
  output logic [$clog2(MAX_ATOMS)-1:0] acc_rd_idx,
  input  force_t                acc_rd_force,
  // status
  output logic                  stall,          // lanes waiting on a distance calculator
  output logic                  skip_nb,        // a neighbor cell fell outside the grid
  output logic                  cell_overflow
);

  localparam int unsigned IW   = $clog2(MAX_ATOMS);
  localparam int unsigned CW   = IW + 1;                 // counts 0..MAX_ATOMS
  localparam int unsigned ROWS = (MAX_ATOMS + K - 1) / K;
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;

  // home-cell level
  typedef enum logic [3:0] {
    S_IDLE, S_NEXT_HOME, S_HOME_REQ, S_HOME_RSP, S_LOAD_HOME,
    S_NB, S_DRAIN, S_WB, S_ADV_HOME, S_DONE
  } state_t;
  // neighbor loader, active in S_NB
  typedef enum logic [2:0] {L_CHECK, L_REQ, L_RSP, L_LOAD, L_END} lstate_t;
  // pair streamer, active in S_NB
  typedef enum logic [1:0] {T_WAIT, T_LATCH, T_STREAM} tstate_t;

  state_t  state;
  lstate_t ls;
  tstate_t ts;

  atom_t home_bank [K][ROWS];
  atom_t nbr_buf   [2][MAX_ATOMS];
  atom_t lane_atom [K];
  logic [K-1:0] lane_ok;

  logic [CELL_W-1:0] hx, hy, hz;
  logic [1:0]        ox, oy, oz;          // neighbor offset + 1
  logic [ADDR_W-1:0] lin, phase;
  logic [ADDR_W-1:0] home_start, nb_start;
  logic [CW-1:0]     home_cnt, nb_ld_cnt;
  logic [CW-1:0]     buf_cnt [2];
  logic [1:0]        buf_full;
  logic              lb, sb;              // buffer being loaded / streamed
  logic [CW-1:0]     iss, rcv, j, wb;
  logic [RW-1:0]     g;

  // neighbor cell coordinates (one more than the real value, to stay unsigned)
  logic [CELL_W:0]   cx1, cy1, cz1;
  logic              nb_in_grid, last_offset;
  logic [ADDR_W-1:0] nb_lin;
  logic              all_ready, streaming;
  logic [CW-1:0]     ld_cnt;
  logic [ADDR_W-1:0] ld_base;
  logic              loading;
  logic [CW-1:0]     rsp_cnt;
  logic [ADDR_W-1:0] rsp_start;
  logic              rsp_over;

  assign cx1 = {1'b0, hx} + CELL_W'(ox);
  assign cy1 = {1'b0, hy} + CELL_W'(oy);
  assign cz1 = {1'b0, hz} + CELL_W'(oz);
  assign nb_in_grid = (cx1 != 0) && (cy1 != 0) && (cz1 != 0) &&
                      (cx1 <= {1'b0, nx}) && (cy1 <= {1'b0, ny}) && (cz1 <= {1'b0, nz});
  assign nb_lin = ((ADDR_W'(cz1 - 1) * ADDR_W'(ny)) + ADDR_W'(cy1 - 1)) * ADDR_W'(nx)
                  + ADDR_W'(cx1 - 1);
  assign last_offset = (ox == 2'd2) && (oy == 2'd2) && (oz == 2'd2);

  // decoded cell-list entry, clamped to the buffer size
  assign rsp_start = mem_rsp_data.q;
  assign rsp_over  = mem_rsp_data.z > 32'(MAX_ATOMS);
  assign rsp_cnt   = rsp_over ? CW'(MAX_ATOMS) : CW'(mem_rsp_data.z);

  assign loading = (state == S_LOAD_HOME) || (state == S_NB && ls == L_LOAD);
  assign ld_cnt  = (state == S_LOAD_HOME) ? home_cnt : nb_ld_cnt;
  assign ld_base = atom_base + ((state == S_LOAD_HOME) ? home_start : nb_start);

  // memory requests
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    acc_rd_idx    = wb[IW-1:0];
    if (state == S_HOME_REQ) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = cell_base + lin;
    end else if (state == S_NB && ls == L_REQ) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = cell_base + nb_lin;
    end else if (loading) begin
      mem_req_valid = (iss < ld_cnt);
      mem_req.addr  = ld_base + ADDR_W'(iss);
    end else if (state == S_WB) begin
      mem_req_valid   = 1'b1;
      mem_req.we      = 1'b1;
      mem_req.addr    = force_base + home_start + ADDR_W'(wb);
      mem_req.wdata.x = acc_rd_force.fx;
      mem_req.wdata.y = acc_rd_force.fy;
      mem_req.wdata.z = acc_rd_force.fz;
      mem_req.wdata.q = FP_ZERO;
    end
  end

  // pair streams
  assign streaming = (state == S_NB) && (ts == T_STREAM);
  always_comb begin
    all_ready = &(out_ready | ~lane_ok);
    for (int k = 0; k < K; k++) begin
      out_valid[k]     = streaming && lane_ok[k] && all_ready;
      out_pair[k].hidx = HIDX_W'(int'(g) * K + k);
      out_pair[k].home = lane_atom[k];
      out_pair[k].nbr  = nbr_buf[sb][j[IW-1:0]];
    end
  end

  assign stall     = streaming && !all_ready;
  assign skip_nb   = (state == S_NB) && (ls == L_CHECK) && !nb_in_grid;
  assign acc_clear = (state == S_HOME_RSP) && mem_rsp_valid;
  assign done      = (state == S_DONE);

  // buffers
  always_ff @(posedge clk) begin
    if (mem_rsp_valid && state == S_LOAD_HOME)
      home_bank[int'(rcv) % K][RW'(int'(rcv) / K)] <= mem_rsp_data;
    if (mem_rsp_valid && state == S_NB && ls == L_LOAD)
      nbr_buf[lb][rcv[IW-1:0]] <= mem_rsp_data;
    if (state == S_NB && ts == T_LATCH)
      for (int k = 0; k < K; k++) lane_atom[k] <= home_bank[k][g];
  end

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      ls            <= L_CHECK;
      ts            <= T_WAIT;
      {hx, hy, hz}  <= '0;
      {ox, oy, oz}  <= '0;
      lin           <= '0;
      phase         <= '0;
      home_start    <= '0;
      nb_start      <= '0;
      home_cnt      <= '0;
      nb_ld_cnt     <= '0;
      buf_cnt[0]    <= '0;
      buf_cnt[1]    <= '0;
      buf_full      <= '0;
      lb            <= 1'b0;
      sb            <= 1'b0;
      iss           <= '0;
      rcv           <= '0;
      j             <= '0;
      wb            <= '0;
      g             <= '0;
      lane_ok       <= '0;
      cell_overflow <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          {hx, hy, hz}  <= '0;
          lin           <= '0;
          phase         <= '0;
          cell_overflow <= 1'b0;
          state <= (nx == 0 || ny == 0 || nz == 0) ? S_DONE : S_NEXT_HOME;
        end
        S_NEXT_HOME:
          state <= (phase == first_cell) ? S_HOME_REQ : S_ADV_HOME;
        S_HOME_REQ:
          if (mem_req_ready) state <= S_HOME_RSP;
        S_HOME_RSP: if (mem_rsp_valid) begin
          home_start <= rsp_start;
          home_cnt   <= rsp_cnt;
          if (rsp_over) cell_overflow <= 1'b1;
          iss <= '0;
          rcv <= '0;
          state <= (rsp_cnt == 0) ? S_ADV_HOME : S_LOAD_HOME;
        end
        S_LOAD_HOME: begin
          if (mem_req_valid && mem_req_ready) iss <= iss + 1'b1;
          if (mem_rsp_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == home_cnt) begin
              {ox, oy, oz} <= '0;
              ls       <= L_CHECK;
              ts       <= T_WAIT;
              buf_full <= '0;
              lb       <= 1'b0;
              sb       <= 1'b0;
              state    <= S_NB;
            end
          end
        end
        S_NB: begin
          // loader: fill buffer lb with the next in-grid, non-empty neighbor cell
          unique case (ls)
            L_CHECK:
              if (!nb_in_grid) begin
                if (last_offset) ls <= L_END;
                {ox, oy, oz} <= next_offset(ox, oy, oz);
              end else if (!buf_full[lb]) begin
                ls <= L_REQ;
              end
            L_REQ:
              if (mem_req_ready) ls <= L_RSP;
            L_RSP: if (mem_rsp_valid) begin
              nb_start  <= rsp_start;
              nb_ld_cnt <= rsp_cnt;
              if (rsp_over) cell_overflow <= 1'b1;
              iss <= '0;
              rcv <= '0;
              if (rsp_cnt == 0) begin
                ls <= last_offset ? L_END : L_CHECK;
                {ox, oy, oz} <= next_offset(ox, oy, oz);
              end else begin
                ls <= L_LOAD;
              end
            end
            L_LOAD: begin
              if (mem_req_valid && mem_req_ready) iss <= iss + 1'b1;
              if (mem_rsp_valid) begin
                rcv <= rcv + 1'b1;
                if (rcv + 1'b1 == nb_ld_cnt) begin
                  buf_full[lb] <= 1'b1;
                  buf_cnt[lb]  <= nb_ld_cnt;
                  lb           <= ~lb;
                  ls <= last_offset ? L_END : L_CHECK;
                  {ox, oy, oz} <= next_offset(ox, oy, oz);
                end
              end
            end
            default: ;
          endcase
          // streamer: send the pairs of buffer sb
          unique case (ts)
            T_WAIT:
              if (buf_full[sb]) begin
                g  <= '0;
                ts <= T_LATCH;
              end else if (ls == L_END) begin
                state <= S_DRAIN;
              end
            T_LATCH: begin
              for (int k = 0; k < K; k++)
                lane_ok[k] <= (CW'(int'(g) * K + k) < home_cnt);
              j  <= '0;
              ts <= T_STREAM;
            end
            T_STREAM: if (all_ready) begin
              if (j + 1'b1 == buf_cnt[sb]) begin
                j <= '0;
                if (CW'((int'(g) + 1) * K) >= home_cnt) begin
                  lane_ok      <= '0;
                  buf_full[sb] <= 1'b0;
                  sb           <= ~sb;
                  ts           <= T_WAIT;
                end else begin
                  g  <= g + 1'b1;
                  ts <= T_LATCH;
                end
              end else begin
                j <= j + 1'b1;
              end
            end
            default: ts <= T_WAIT;
          endcase
        end
        S_DRAIN: if (!pipe_busy) begin
          wb    <= '0;
          state <= S_WB;
        end
        S_WB: if (mem_req_ready) begin
          wb <= wb + 1'b1;
          if (wb + 1'b1 == home_cnt) state <= S_ADV_HOME;
        end
        S_ADV_HOME: begin
          lin   <= lin + 1'b1;
          phase <= (phase + 1'b1 == cell_stride) ? '0 : phase + 1'b1;
          if (hx + 1'b1 != nx) begin
            hx    <= hx + 1'b1;
            state <= S_NEXT_HOME;
          end else begin
            hx <= '0;
            if (hy + 1'b1 != ny) begin
              hy    <= hy + 1'b1;
              state <= S_NEXT_HOME;
            end else begin
              hy <= '0;
              if (hz + 1'b1 != nz) begin
                hz    <= hz + 1'b1;
                state <= S_NEXT_HOME;
              end else begin
                state <= S_DONE;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // offsets run x fastest, then y, then z, each over 0..2 (meaning -1..+1)
  function automatic logic [5:0] next_offset(input logic [1:0] x, input logic [1:0] y,
                                             input logic [1:0] z);
    if (x != 2'd2) return {x + 2'd1, y, z};
    if (y != 2'd2) return {2'd0, y + 2'd1, z};
    return {2'd0, 2'd0, z + 2'd1};
  endfunction

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state inside {S_HOME_RSP, S_LOAD_HOME}) ||
                      (state == S_NB && ls inside {L_RSP, L_LOAD}));
  a_lanes_together: assert property (@(posedge clk) disable iff (!rst_n)
    (|out_valid) |-> (out_valid == lane_ok));
  a_buffer_order: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_NB && ls == L_LOAD) |-> !buf_full[lb]);

endmodule
