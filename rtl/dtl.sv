// dtl: Dirty Translation List of the CMT.
//
// Every translation page (TVPN) that has at least one dirty CMT block owns
// one DTL entry: valid, TVPN, count of its dirty CMT blocks, an "updated"
// bit, and "next", the CMT block (set and way) at the head of a chain of that
// page's dirty blocks. The chain continues through the next field stored in
// each CMT block, so a flush finds all dirty blocks of one translation page by
// following links instead of searching the cache.
//
// Operations (at most one per cycle; the CMT sequences them):
//  * mark(tvpn, blk): a CMT block turned dirty. If the TVPN has an entry, the
//    entry's next is returned on mark_old_next (the CMT stores it as the
//    block's own next), the entry's next becomes blk, count is incremented and
//    updated is set. Otherwise a new entry is appended at the tail with
//    count 1 and next = blk, and mark_hit is low (the block's next is empty).
//  * touch(tvpn): an already dirty block was updated again: set updated.
//  * query(tvpn): combinational lookup of the entry of one TVPN.
//  * select: walk the list from head (oldest) to tail, one entry per clock,
//    and pick the flush victim. Every visited entry's updated bit is cleared
//    after being read (second chance). sel_done pulses with the result.
//  * remove(idx): unlink a flushed entry and return it to the free list.
//
// Victim choice combines the paper's three criteria in one comparison:
// greedy (largest count) first, then least-recently-updated (updated bit
// clear), then oldest-update-first (earliest registered, since the walk goes
// head to tail and only a strictly better score replaces the current pick).
// The paper names the criteria but gives no weighting; this order is this
// design's choice. Head and tail pointers and tail registration are the
// paper's; the doubly linked order list, the free list and the direct
// TVPN-to-entry table used for the "is the TVPN registered" check are this
// design's way of implementing them. With ENTRIES equal to the number of CMT
// blocks the list can never overflow (each entry has at least one dirty block).
module dtl
  import fmmu_pkg::*;
#(
  parameter int ENTRIES  = 1024,  // = number of CMT blocks (64 KB / 64 B)
  parameter int NUM_TVPN = 4096,
  parameter int BID_W    = 10     // CMT block id {set, way}
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // mark / touch
  input  logic                   mark_valid,
  input  logic [TVPN_W-1:0]      mark_tvpn,
  input  logic [BID_W-1:0]       mark_blk,
  output logic                   mark_hit,
  output logic [BID_W-1:0]       mark_old_next,
  input  logic                   touch_valid,
  input  logic [TVPN_W-1:0]      touch_tvpn,
  // query
  input  logic [TVPN_W-1:0]      query_tvpn,
  output logic                   query_hit,
  output logic [$clog2(ENTRIES)-1:0] query_idx,
  output logic [BID_W-1:0]       query_first_blk,
  output logic [6:0]             query_count,
  // select
  input  logic                   sel_start,
  output logic                   sel_busy,
  output logic                   sel_done,
  output logic                   sel_found,
  output logic [$clog2(ENTRIES)-1:0] sel_idx,
  output logic [TVPN_W-1:0]      sel_tvpn,
  output logic [BID_W-1:0]       sel_first_blk,
  output logic [6:0]             sel_count,
  // remove
  input  logic                   rm_valid,
  input  logic [$clog2(ENTRIES)-1:0] rm_idx,
  // status
  output logic [$clog2(ENTRIES+1)-1:0] num_entries
);
  localparam int IW = $clog2(ENTRIES);
  localparam int TW = $clog2(NUM_TVPN);

  // entry fields
  logic             e_valid   [ENTRIES];
  logic [TVPN_W-1:0] e_tvpn   [ENTRIES];
  logic [6:0]       e_count   [ENTRIES];
  logic             e_updated [ENTRIES];
  logic [BID_W-1:0] e_next    [ENTRIES];
  // registration order (head = oldest)
  logic [IW-1:0]    o_prev    [ENTRIES];
  logic [IW-1:0]    o_next    [ENTRIES];
  logic [IW-1:0]    head, tail;
  // free list (stack)
  logic [IW-1:0]    free_stk  [ENTRIES];
  logic [IW:0]      free_top;   // number of free entries
  // TVPN -> entry
  logic             map_v     [NUM_TVPN];
  logic [IW-1:0]    map_idx   [NUM_TVPN];

  assign num_entries = ($clog2(ENTRIES+1))'(ENTRIES - int'(free_top));

  // ---- combinational lookups ----
  logic [IW-1:0] mark_e;
  assign mark_hit      = map_v[mark_tvpn[TW-1:0]];
  assign mark_e        = map_idx[mark_tvpn[TW-1:0]];
  assign mark_old_next = e_next[mark_e];

  assign query_hit       = map_v[query_tvpn[TW-1:0]];
  assign query_idx       = map_idx[query_tvpn[TW-1:0]];
  assign query_first_blk = e_next[query_idx];
  assign query_count     = e_count[query_idx];

  logic [IW-1:0] new_e;
  assign new_e = free_stk[free_top[IW-1:0] - 1'b1];

  // ---- select walk state ----
  typedef enum logic [1:0] {SEL_IDLE, SEL_WALK, SEL_DONE} sel_state_e;
  sel_state_e     sstate;
  logic [IW-1:0]  cur;
  logic [IW:0]    left;          // entries still to visit
  logic [7:0]     best_score;
  logic [7:0]     cur_score;
  assign cur_score = {e_count[cur], !e_updated[cur]};

  assign sel_busy = (sstate != SEL_IDLE);
  assign sel_done = (sstate == SEL_DONE);
  assign sel_tvpn      = e_tvpn[sel_idx];
  assign sel_first_blk = e_next[sel_idx];
  assign sel_count     = e_count[sel_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head       <= '0;
      tail       <= '0;
      free_top   <= (IW+1)'(ENTRIES);
      sstate     <= SEL_IDLE;
      cur        <= '0;
      left       <= '0;
      best_score <= '0;
      sel_idx    <= '0;
      sel_found  <= 1'b0;
      for (int i = 0; i < ENTRIES; i++) begin
        e_valid[i]  <= 1'b0;
        free_stk[i] <= IW'(ENTRIES - 1 - i);
      end
      for (int t = 0; t < NUM_TVPN; t++) map_v[t] <= 1'b0;
    end else begin
      // ---------------- mark ----------------
      if (mark_valid) begin
        if (mark_hit) begin
          e_next[mark_e]    <= mark_blk;
          e_count[mark_e]   <= e_count[mark_e] + 1'b1;
          e_updated[mark_e] <= 1'b1;
        end else begin
          e_valid[new_e]   <= 1'b1;
          e_tvpn[new_e]    <= mark_tvpn;
          e_count[new_e]   <= 7'd1;
          e_updated[new_e] <= 1'b1;
          e_next[new_e]    <= mark_blk;
          map_v[mark_tvpn[TW-1:0]]   <= 1'b1;
          map_idx[mark_tvpn[TW-1:0]] <= new_e;
          free_top <= free_top - 1'b1;
          if (free_top == (IW+1)'(ENTRIES)) begin   // list was empty
            head <= new_e;
          end else begin
            o_next[tail] <= new_e;
          end
          o_prev[new_e] <= tail;
          tail <= new_e;
        end
      end else if (touch_valid && map_v[touch_tvpn[TW-1:0]]) begin
        e_updated[map_idx[touch_tvpn[TW-1:0]]] <= 1'b1;
      end

      // ---------------- remove ----------------
      if (rm_valid) begin
        e_valid[rm_idx] <= 1'b0;
        map_v[e_tvpn[rm_idx][TW-1:0]] <= 1'b0;
        free_stk[free_top[IW-1:0]] <= rm_idx;
        free_top <= free_top + 1'b1;
        if (rm_idx == head) head <= o_next[rm_idx];
        else                o_next[o_prev[rm_idx]] <= o_next[rm_idx];
        if (rm_idx == tail) tail <= o_prev[rm_idx];
        else                o_prev[o_next[rm_idx]] <= o_prev[rm_idx];
      end

      // ---------------- select ----------------
      case (sstate)
        SEL_IDLE: if (sel_start) begin
          cur        <= head;
          left       <= (IW+1)'(ENTRIES) - free_top;
          best_score <= '0;
          sel_found  <= 1'b0;
          sstate     <= (free_top == (IW+1)'(ENTRIES)) ? SEL_DONE : SEL_WALK;
        end
        SEL_WALK: begin
          if (cur_score > best_score) begin
            best_score <= cur_score;
            sel_idx    <= cur;
            sel_found  <= 1'b1;
          end
          e_updated[cur] <= 1'b0;           // second chance consumed
          cur  <= o_next[cur];
          left <= left - 1'b1;
          if (left == (IW+1)'(1)) sstate <= SEL_DONE;
        end
        default: sstate <= SEL_IDLE;        // SEL_DONE lasts one cycle
      endcase
    end
  end

  // mark and remove are never issued during a select walk, and never both
  assert property (@(posedge clk) disable iff (!rst_n) sstate == SEL_WALK |-> !(mark_valid || rm_valid));
  assert property (@(posedge clk) disable iff (!rst_n) !(mark_valid && rm_valid));
  // every entry on the order list is valid
  assert property (@(posedge clk) disable iff (!rst_n) sstate == SEL_WALK |-> e_valid[cur]);
  assert property (@(posedge clk) disable iff (!rst_n) mark_valid && !mark_hit |-> free_top != '0);

endmodule
