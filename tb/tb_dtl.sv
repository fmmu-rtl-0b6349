// tb_dtl: self-checking test of the Dirty Translation List. A reference
// model keeps the entries as an ordered SystemVerilog queue (oldest first)
// and predicts: whether a TVPN is registered and which block its chain
// starts with (mark), the entry returned by query, and the flush victim of
// select (largest dirty count, then updated bit clear, then oldest), with the
// updated bits cleared by the walk. Selected victims are removed. The walk
// must take one cycle per registered entry.
module tb_dtl;
  import fmmu_pkg::*;
  localparam int ENTRIES = 32;
  localparam int NT = 64;
  localparam int BW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mark_valid, mark_hit, touch_valid, sel_start, sel_busy, sel_done, sel_found, rm_valid, query_hit;
  logic [TVPN_W-1:0] mark_tvpn, touch_tvpn, query_tvpn, sel_tvpn;
  logic [BW-1:0] mark_blk, mark_old_next, query_first_blk, sel_first_blk;
  logic [4:0] query_idx, sel_idx, rm_idx;
  logic [6:0] query_count, sel_count;
  logic [5:0] num_entries;
  dtl #(.ENTRIES(ENTRIES), .NUM_TVPN(NT), .BID_W(BW)) dut (.*);

  typedef struct { int tvpn; int count; bit upd; int next; } ent_t;
  ent_t m [$];
  int blk_ctr = 0;

  function automatic int find(int t);
    foreach (m[i]) if (m[i].tvpn == t) return i;
    return -1;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    int t, i, best, bscore, sc, t0;
    mark_valid = 0; touch_valid = 0; sel_start = 0; rm_valid = 0;
    mark_tvpn = '0; touch_tvpn = '0; query_tvpn = '0; mark_blk = '0; rm_idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      case ($urandom_range(9))
        0,1,2,3,4: if (m.size() < ENTRIES) begin
          t = int'($urandom_range(NT - 1));
          i = find(t);
          mark_valid = 1; mark_tvpn = TVPN_W'(t); mark_blk = BW'(blk_ctr);
          #1;
          chk(mark_hit == (i >= 0), "mark_hit");
          if (i >= 0) begin
            chk(int'(mark_old_next) == m[i].next, "mark_old_next");
            m[i].next = blk_ctr; m[i].count++; m[i].upd = 1;
          end else m.push_back('{tvpn: t, count: 1, upd: 1, next: blk_ctr});
          blk_ctr = (blk_ctr + 1) % 32;
          @(posedge clk); #1; mark_valid = 0;
        end
        5: begin
          t = int'($urandom_range(NT - 1));
          i = find(t);
          touch_valid = 1; touch_tvpn = TVPN_W'(t);
          if (i >= 0) m[i].upd = 1;
          @(posedge clk); #1; touch_valid = 0;
        end
        6: begin
          t = (m.size() > 0 && $urandom_range(1)) ? m[$urandom_range(m.size()-1)].tvpn : int'($urandom_range(NT-1));
          i = find(t);
          query_tvpn = TVPN_W'(t); #1;
          chk(query_hit == (i >= 0), "query_hit");
          if (i >= 0) chk(int'(query_first_blk) == m[i].next && int'(query_count) == m[i].count, "query entry");
        end
        default: begin
          // select and remove
          best = -1; bscore = -1;
          foreach (m[k]) begin
            sc = m[k].count * 2 + (m[k].upd ? 0 : 1);
            if (sc > bscore) begin bscore = sc; best = k; end
          end
          sel_start = 1; t0 = 0;
          @(posedge clk); #1; sel_start = 0;
          while (!sel_done) begin @(posedge clk); #1; t0++; end
          chk(t0 == m.size(), "select walk takes one cycle per entry");
          chk(sel_found == (best >= 0), "sel_found");
          if (best >= 0) begin
            chk(int'(sel_tvpn) == m[best].tvpn && int'(sel_first_blk) == m[best].next &&
                int'(sel_count) == m[best].count, "selected victim");
            foreach (m[k]) m[k].upd = 0;
            @(negedge clk);
            rm_valid = 1; rm_idx = sel_idx;
            @(posedge clk); #1; rm_valid = 0;
            m.delete(best);
          end
        end
      endcase
      chk(int'(num_entries) == m.size(), "num_entries");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
