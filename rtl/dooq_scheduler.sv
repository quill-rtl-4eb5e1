// dooq_scheduler: Distance-based Out-of-Order Querying.
//
// Queries arrive in their stored order as (x, y, query id) on the in_* stream.
// The first one becomes the current point and is emitted at once.  The next
// WD queries fill the lookup window.  Then, per step, the scheduler
//   1. loads every window slot with its l1 distance |x-xc|+|y-yc| to the
//      current point (one cycle),
//   2. sorts the WD keys with a cyclic bitonic sorter: WD/2 compare-and-swap
//      elements applied once per cycle, one bitonic stage per cycle, for
//      log2(WD)*(log2(WD)+1)/2 cycles (45 for WD=512),
//   3. emits the head of the sorted list (nearest query) on out_*, frees its
//      slot, makes it the current point and refills the slot from in_*.
// This is Algorithm 1 of the design (argmin in l1, emit, remove, update).
// Ties are broken by the smaller query id (the key is {dist, id}), so the
// order does not depend on the slot a query happens to occupy.  Empty slots
// carry a key above every real one.  When in_last has been taken the window
// drains until it is empty, then done is raised until the next start.
// The window, l1 metric, bitonic sorter, pop and current-point update follow
// the paper; slot reuse instead of the shifting window drawn in its figure,
// the tie rule and the handshakes are this design's choices.
// Timing: one query per 1 + LW(LW+1)/2 + 1 cycles (LW = log2 WD) when out_ready is high.
module dooq_scheduler
  import quill_pkg::*;
#(
  parameter int unsigned WD  = WD_DEF,      // lookup window size (power of 2)
  parameter int unsigned QW  = 15           // query id width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,              // clear state, begin a new pass
  // reference points in stored order
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [PW-1:0] in_x,
  input  logic [PW-1:0] in_y,
  input  logic [QW-1:0] in_qid,
  input  logic          in_last,
  // scheduled order
  output logic          out_valid,
  input  logic          out_ready,
  output logic [PW-1:0] out_x,
  output logic [PW-1:0] out_y,
  output logic [QW-1:0] out_qid,
  output logic [PW:0]   out_dist,           // l1 distance to the previous query
  output logic          done
);
  localparam int unsigned LW   = $clog2(WD);
  localparam int unsigned DW   = PW + 1;
  localparam int unsigned IVW  = $clog2(LW + 1);
  localparam int unsigned KEYW = 1 + DW + QW + LW;   // {empty, dist, id, slot}

  typedef enum logic [2:0] {S_IDLE, S_FIRST, S_FILL, S_DIST, S_SORT, S_EMIT, S_DONE} state_t;
  state_t state;

  logic [WD-1:0]   slot_v;
  logic [PW-1:0]   slot_x   [WD];
  logic [PW-1:0]   slot_y   [WD];
  logic [QW-1:0]   slot_q   [WD];
  logic [KEYW-1:0] key      [WD];
  logic [KEYW-1:0] key_nxt  [WD];
  logic [PW-1:0]   cur_x, cur_y;
  logic            got_last;
  logic [LW-1:0]   free_slot;  // lowest empty slot
  logic            full;
  logic [LW-1:0]   stg_k;      // log2 of the bitonic block size minus one
  logic [LW-1:0]   stg_j;      // log2 of the compare distance
  logic [LW-1:0]   win_slot;

  // One bitonic stage: block size 2^(stg_k+1), distance 2^stg_j.  The
  // partner of slot i is i ^ 2^stg_j; it is chosen from the LW fixed
  // partners so that each slot sees an LW-input multiplexer.
  always_comb begin
    for (int unsigned i = 0; i < WD; i++) begin
      logic [KEYW-1:0] kp;
      logic [LW:0]     iv;
      logic            up, lo_side, swap;
      iv = (LW+1)'(i);
      kp = key[i];
      for (int unsigned j = 0; j < LW; j++)
        if (stg_j == LW'(j)) kp = key[i ^ (1 << j)];
      up      = !iv[IVW'(stg_k) + IVW'(1)];
      lo_side = !iv[IVW'(stg_j)];
      // the lower index keeps the smaller key in an ascending block
      if (lo_side) swap = up ? (key[i] > kp) : (key[i] < kp);
      else         swap = up ? (kp > key[i]) : (kp < key[i]);
      key_nxt[i] = swap ? kp : key[i];
    end
  end

  function automatic logic [DW-1:0] l1(input logic [PW-1:0] ax, ay, bx, by);
    logic [PW-1:0] ex, ey;
    ex = (ax > bx) ? ax - bx : bx - ax;
    ey = (ay > by) ? ay - by : by - ay;
    return DW'(ex) + DW'(ey);
  endfunction

  always_comb begin
    free_slot = '0;
    for (int i = WD-1; i >= 0; i--) if (!slot_v[i]) free_slot = LW'(i);
  end
  assign full      = &slot_v;
  assign win_slot  = key[0][LW-1:0];
  assign in_ready  = (state == S_FIRST && out_ready) || (state == S_FILL && !got_last && !full)
                   || (state == S_EMIT && out_ready && !got_last);
  assign out_valid = (state == S_FIRST && in_valid) || (state == S_EMIT);
  assign out_x     = (state == S_FIRST) ? in_x   : slot_x[win_slot];
  assign out_y     = (state == S_FIRST) ? in_y   : slot_y[win_slot];
  assign out_qid   = (state == S_FIRST) ? in_qid : slot_q[win_slot];
  assign out_dist  = (state == S_FIRST) ? '0     : key[0][QW+LW +: DW];
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      slot_v <= '0;
      cur_x <= '0; cur_y <= '0;
      got_last <= 1'b0;
      stg_k <= '0; stg_j <= '0;
    end else if (start) begin
      state <= S_FIRST;
      slot_v <= '0;
      got_last <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: ;
        S_FIRST: if (in_valid && out_ready) begin
          // the first query is emitted as-is and seeds the current point
          cur_x <= in_x; cur_y <= in_y;
          if (in_last) begin state <= S_DONE; got_last <= 1'b1; end
          else state <= S_FILL;
        end
        S_FILL: begin
          if (in_valid && in_ready) begin
            slot_v[free_slot] <= 1'b1;
            slot_x[free_slot] <= in_x;
            slot_y[free_slot] <= in_y;
            slot_q[free_slot] <= in_qid;
            if (in_last) got_last <= 1'b1;
          end
          if (got_last || full || (in_valid && in_ready && (in_last || $countones(~slot_v) == 1)))
            state <= S_DIST;
        end
        S_DIST: begin
          if (slot_v == '0) state <= got_last ? S_DONE : S_FILL;
          else begin
            for (int unsigned i = 0; i < WD; i++)
              key[i] <= {!slot_v[i], l1(slot_x[i], slot_y[i], cur_x, cur_y), slot_q[i], LW'(i)};
            stg_k <= '0; stg_j <= '0;
            state <= S_SORT;
          end
        end
        S_SORT: begin
          key <= key_nxt;
          if (stg_j == 0) begin
            if (stg_k == LW'(LW - 1)) state <= S_EMIT;
            else begin stg_k <= stg_k + 1'b1; stg_j <= stg_k + 1'b1; end
          end else stg_j <= stg_j - 1'b1;
        end
        S_EMIT: if (out_ready) begin
          cur_x <= slot_x[win_slot];
          cur_y <= slot_y[win_slot];
          if (in_valid && !got_last) begin
            // refill the freed slot with the next query in stored order
            slot_x[win_slot] <= in_x;
            slot_y[win_slot] <= in_y;
            slot_q[win_slot] <= in_qid;
            if (in_last) got_last <= 1'b1;
          end else slot_v[win_slot] <= 1'b0;
          state <= S_DIST;
        end
        S_DONE: ;
        default: state <= S_IDLE;
      endcase
    end
  end

  // the head of the sorted list must be a real query whenever one is emitted
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_EMIT) |-> !key[0][KEYW-1]);
endmodule
