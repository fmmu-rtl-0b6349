// tb_fmmu_env: end-to-end test bench body for fmmu_top, shared by the
// reduced-size test (tb_fmmu_top) and the full-size test (tb_fmmu_full).
//
// Around the FMMU sit the behavioural flash controller, block manager and
// page buffer of ssd_model. The GTD is loaded so that TVPN t lives at
// TPPN t, whose power-up content maps DLPN d to 7*d+3. A golden map in the
// test bench (an associative array over DLPNs) is updated in the order
// requests are issued; every response is checked against the value the
// golden map predicted when the request was issued. This is exact because
// the FMMU keeps the order of the requests of one queue for any one DLPN.
//
// Phases:
//  1. latency: a Lookup that misses in the CMT but hits in the CTP must be
//     answered within 64 cycles once the CTP is idle (a bound chosen here;
//     the paper gives no cycle counts). A CMT hit must take at most 8.
//  2. random traffic: the HRM issues Lookups and Updates with locality over
//     N_TP translation pages; the GCM issues Lookups and CondUpdates (with a
//     right or a wrong old DPPN) on its own two pages. Responses are taken
//     with random back-pressure.
//  3. the GC race of the paper: Update by the HRM, then a CondUpdate by the
//     GCM with the stale old DPPN must be refused, one with the current DPPN
//     applied.
//  4. read-back: every DLPN the test touched is looked up again.
// Each mechanism (hits, misses, merged misses, blocked requests, CMT and CTP
// flushes, GTD updates, CondUpdate refusal, flush mode) is counted; with
// REQUIRE_ALL, one that never happened counts as a failure.
module tb_fmmu_env
  import fmmu_pkg::*;
#(
  parameter bit FULL        = 1'b0,
  parameter int CMT_SETS    = 8,
  parameter int CMT_WAYS    = 4,
  parameter int CTP_SETS    = 2,
  parameter int CTP_WAYS    = 4,
  parameter int N_OPS       = 4000,
  parameter int N_TP        = 12,
  parameter bit REQUIRE_ALL = 1'b1,
  parameter int WATCHDOG    = 2_000_000
) ();
  localparam int NUM_TVPN = 4096;
  localparam int NSLOTS   = FULL ? 2 * 64 * 4 : 2 * CTP_SETS * CTP_WAYS;
  localparam int MAXOUT   = 48;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- DUT wiring ----------------
  logic hrm_req_valid, hrm_req_ready, hrm_resp_valid, hrm_resp_ready;
  logic gcm_req_valid, gcm_req_ready, gcm_resp_valid, gcm_resp_ready;
  map_req_t hrm_req, gcm_req;
  map_resp_t hrm_resp, gcm_resp;
  logic fc_req_valid, fc_req_ready, fc_resp_valid, fc_resp_ready;
  logic bm_req_valid, bm_req_ready, bm_resp_valid, bm_resp_ready;
  fc_req_t fc_req; fc_resp_t fc_resp; bm_req_t bm_req; bm_resp_t bm_resp;
  logic pb_en, pb_we; logic [SLOT_W-1:0] pb_slot; logic [ROW_W-1:0] pb_row;
  line_t pb_wdata, pb_rdata;
  logic gtd_init_we; logic [TVPN_W-1:0] gtd_init_tvpn; logic [PPN_W-1:0] gtd_init_tppn;
  logic [3:0] hrm_weight, gcm_weight;
  logic cmt_flush_mode;
  cmt_ev_t cmt_ev;
  ctp_ev_t ctp_ev;
  int fc_reads, bm_programs;

  if (FULL) begin : g_full
    fmmu_top u_dut (.*);
  end else begin : g_small
    fmmu_top #(.CMT_SETS(CMT_SETS), .CMT_WAYS(CMT_WAYS),
               .CTP_SETS(CTP_SETS), .CTP_WAYS(CTP_WAYS)) u_dut (.*);
  end

  ssd_model #(.NUM_TVPN(NUM_TVPN), .NSLOTS(NSLOTS)) u_ssd (.*);

  // ---------------- golden map ----------------
  logic [PPN_W-1:0] gold [longint];
  function automatic logic [PPN_W-1:0] gold_get(input longint d);
    return gold.exists(d) ? gold[d] : PPN_W'(d * 7 + 3);
  endfunction

  // expected responses, by request ID
  logic             exp_v   [65536];
  map_op_e          exp_op  [65536];
  logic [PPN_W-1:0] exp_dppn[65536];
  logic             exp_app [65536];
  int               out_hrm = 0, out_gcm = 0;
  int               next_id = 0;
  int               last_resp_cyc = 0;

  // ---------------- mechanism counters ----------------
  int n_cmt_hit, n_cmt_miss, n_cmt_merge, n_cmt_block, n_cmt_resp, n_cmt_ftvpn, n_cmt_fblk, n_rej;
  int n_ctp_hit, n_ctp_miss, n_ctp_merge, n_ctp_block, n_ctp_fill, n_ctp_flush, n_gtd, n_fmode;
  logic fmode_q;
  always @(posedge clk) if (rst_n) begin
    n_cmt_hit   += int'(cmt_ev.hit);
    n_cmt_miss  += int'(cmt_ev.miss);
    n_cmt_merge += int'(cmt_ev.merge);
    n_cmt_block += int'(cmt_ev.blocked);
    n_cmt_resp  += int'(cmt_ev.resp);
    n_cmt_ftvpn += int'(cmt_ev.flush_tvpn);
    n_cmt_fblk  += int'(cmt_ev.flush_blk);
    n_rej       += int'(cmt_ev.cond_reject);
    n_ctp_hit   += int'(ctp_ev.hit);
    n_ctp_miss  += int'(ctp_ev.miss);
    n_ctp_merge += int'(ctp_ev.merge);
    n_ctp_block += int'(ctp_ev.blocked);
    n_ctp_fill  += int'(ctp_ev.fill);
    n_ctp_flush += int'(ctp_ev.flush);
    n_gtd       += int'(ctp_ev.gtd_update);
    n_fmode     += int'(cmt_flush_mode && !fmode_q);
    fmode_q     <= cmt_flush_mode;
  end

  // ---------------- response checking ----------------
  logic bp_on = 1'b0;   // random back-pressure
  always @(posedge clk) begin
    hrm_resp_ready <= !bp_on || ($urandom_range(9) != 0);
    gcm_resp_ready <= !bp_on || ($urandom_range(9) != 0);
  end

  longint trace_dlpn = -1;
  initial if (!$value$plusargs("trace=%d", trace_dlpn)) trace_dlpn = -1;

  task automatic check_resp(input map_resp_t r, input string who);
    checks++;
    if (longint'(r.dlpn) == trace_dlpn)
      $display("[%0d] trace resp %s id %0d op %0d dppn %0h applied %0b", cyc, who, r.id, r.op, r.dppn, r.applied);
    if (!exp_v[r.id]) begin
      failures++;
      $display("FAIL %s: unexpected response id %0d", who, r.id);
    end else if (r.op != exp_op[r.id] || r.dppn != exp_dppn[r.id] ||
                 (r.op != OP_LOOKUP && r.applied != exp_app[r.id])) begin
      failures++;
      $display("FAIL %s id %0d dlpn %0d op %0d: dppn %0h applied %0b, expected %0h %0b",
               who, r.id, r.dlpn, r.op, r.dppn, r.applied, exp_dppn[r.id], exp_app[r.id]);
    end
    exp_v[r.id] = 1'b0;
    last_resp_cyc = cyc;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (hrm_resp_valid && hrm_resp_ready) begin check_resp(hrm_resp, "HRM"); out_hrm--; end
    if (gcm_resp_valid && gcm_resp_ready) begin check_resp(gcm_resp, "GCM"); out_gcm--; end
  end

  // ---------------- request issue ----------------
  task automatic issue(input bit gc, input map_op_e op, input longint d,
                       input logic [PPN_W-1:0] nd, input logic [PPN_W-1:0] od,
                       output int id);
    map_req_t r;
    logic [PPN_W-1:0] cur;
    while ((gc ? out_gcm : out_hrm) >= MAXOUT || exp_v[next_id]) @(posedge clk);
    id = next_id;
    next_id = (next_id + 1) % 65536;
    cur = gold_get(d);
    r.op = op; r.id = REQ_ID_W'(id); r.dlpn = DLPN_W'(d); r.dppn = nd; r.old_dppn = od;
    exp_v[id] = 1'b1;
    exp_op[id] = op;
    exp_dppn[id] = cur;
    exp_app[id] = (op == OP_UPDATE) || (op == OP_CONDUPDATE && cur == od);
    if (exp_app[id]) gold[d] = nd;
    if (d == trace_dlpn)
      $display("[%0d] trace issue gc %0d id %0d op %0d new %0h old %0h cur %0h", cyc, gc, id, op, nd, od, cur);
    // drive on the falling edge, when ready has settled; accepted at the next rising edge
    if (gc) begin
      out_gcm++;
      @(negedge clk);
      while (!gcm_req_ready) @(negedge clk);
      gcm_req = r; gcm_req_valid = 1'b1;
      @(negedge clk);
      gcm_req_valid = 1'b0;
    end else begin
      out_hrm++;
      @(negedge clk);
      while (!hrm_req_ready) @(negedge clk);
      hrm_req = r; hrm_req_valid = 1'b1;
      @(negedge clk);
      hrm_req_valid = 1'b0;
    end
  endtask

  task automatic drain();
    while (out_hrm != 0 || out_gcm != 0) @(posedge clk);
  endtask

  task automatic expect_count(input string name, input int n);
    checks++;
    $display("  %-28s %0d", name, n);
    if (REQUIRE_ALL && n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end
  endtask

  // ---------------- stimulus ----------------
  longint touched [$];
  initial begin
    int id, t0, lat;
    longint d, last_d;
    hrm_req_valid = 0; gcm_req_valid = 0; hrm_req = '0; gcm_req = '0;
    gtd_init_we = 0; gtd_init_tvpn = '0; gtd_init_tppn = '0;
    hrm_weight = 4'd2; gcm_weight = 4'd1;
    fmode_q = 0;
    n_cmt_hit = 0; n_cmt_miss = 0; n_cmt_merge = 0; n_cmt_block = 0; n_cmt_resp = 0;
    n_cmt_ftvpn = 0; n_cmt_fblk = 0; n_rej = 0; n_ctp_hit = 0; n_ctp_miss = 0; n_ctp_merge = 0;
    n_ctp_block = 0; n_ctp_fill = 0; n_ctp_flush = 0; n_gtd = 0; n_fmode = 0;
    for (int i = 0; i < 65536; i++) exp_v[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // power-up GTD load: TVPN t at TPPN t
    for (int t = 0; t < NUM_TVPN; t++) begin
      gtd_init_we <= 1'b1; gtd_init_tvpn <= TVPN_W'(t); gtd_init_tppn <= PPN_W'(t);
      @(posedge clk);
    end
    gtd_init_we <= 1'b0;
    @(posedge clk);

    // ---- 1. latency of a CMT miss that hits in the CTP ----
    issue(0, OP_LOOKUP, 0, '0, '0, id);
    drain();
    repeat (100) @(posedge clk);      // let the CTP finish copying the page in
    t0 = cyc;
    issue(0, OP_LOOKUP, 16, '0, '0, id);
    drain();
    lat = last_resp_cyc - t0;
    checks++;
    $display("CMT-miss/CTP-hit Lookup latency: %0d cycles", lat);
    if (lat > 64) begin failures++; $display("FAIL latency %0d > 64 cycles", lat); end
    t0 = cyc;
    issue(0, OP_LOOKUP, 17, '0, '0, id);
    drain();
    lat = last_resp_cyc - t0;
    checks++;
    $display("CMT-hit Lookup latency: %0d cycles", lat);
    if (lat > 8) begin failures++; $display("FAIL latency %0d > 8 cycles", lat); end

    // ---- 2. random traffic ----
    bp_on = 1'b1;
    last_d = 0;
    fork
      begin : hrm_traffic
        for (int n = 0; n < N_OPS; n++) begin
          int sel;
          map_op_e op;
          sel = int'($urandom_range(99));
          if (sel < 55) d = (last_d + longint'($urandom_range(40))) % (longint'(N_TP) * 1024);
          else          d = longint'($urandom_range(N_TP * 1024 - 1));
          last_d = d;
          op = ($urandom_range(99) < 60) ? OP_UPDATE : OP_LOOKUP;
          touched.push_back(d);
          issue(0, op, d, PPN_W'($urandom()), '0, id);
        end
      end
      begin : gcm_traffic
        for (int n = 0; n < N_OPS / 4; n++) begin
          longint g;
          logic [PPN_W-1:0] od;
          g = longint'(N_TP) * 1024 + longint'($urandom_range(2047));
          touched.push_back(g);
          if ($urandom_range(2) == 0) issue(1, OP_LOOKUP, g, '0, '0, id);
          else begin
            od = gold_get(g);
            if ($urandom_range(3) == 0) od = od + 1;   // stale copy
            issue(1, OP_CONDUPDATE, g, PPN_W'($urandom()), od, id);
          end
        end
      end
    join
    drain();
    bp_on = 1'b0;

    // ---- 3. GC race: CondUpdate after a newer Update ----
    begin
      logic [PPN_W-1:0] prev_dppn;
      d = 5000;
      prev_dppn = gold_get(d);
      issue(0, OP_UPDATE, d, 32'h0BAD_0001, '0, id);   // host rewrites the page
      drain();
      issue(1, OP_CONDUPDATE, d, 32'h0BAD_0002, prev_dppn, id);   // GC copy finishes late
      drain();
      checks++;
      if (gold_get(d) != 32'h0BAD_0001) begin failures++; $display("FAIL race model"); end
      issue(1, OP_CONDUPDATE, d, 32'h0BAD_0003, 32'h0BAD_0001, id);
      drain();
      issue(0, OP_LOOKUP, d, '0, '0, id);
      drain();
      touched.push_back(d);
    end

    // ---- 4. read back everything touched ----
    foreach (touched[i]) issue(0, OP_LOOKUP, touched[i], '0, '0, id);
    drain();

    $display("mechanisms:");
    expect_count("CMT hit", n_cmt_hit);
    expect_count("CMT miss (load to CTP)", n_cmt_miss);
    expect_count("CMT merged miss (MSHR)", n_cmt_merge);
    expect_count("CMT blocked request", n_cmt_block);
    expect_count("CMT response replay", n_cmt_resp);
    expect_count("CMT page flush (DTL)", n_cmt_ftvpn);
    expect_count("CMT block flush", n_cmt_fblk);
    expect_count("CMT flush mode entered", n_fmode);
    expect_count("CondUpdate refused", n_rej);
    expect_count("CTP hit", n_ctp_hit);
    expect_count("CTP miss (flash read)", n_ctp_miss);
    expect_count("CTP merged miss (MSHR)", n_ctp_merge);
    expect_count("CTP blocked request", n_ctp_block);
    expect_count("CTP fill", n_ctp_fill);
    expect_count("CTP flush (program)", n_ctp_flush);
    expect_count("GTD update", n_gtd);
    $display("  flash reads %0d, translation page programs %0d, cycles %0d", fc_reads, bm_programs, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog after %0d cycles (HRM outstanding %0d, GCM %0d)", WATCHDOG, out_hrm, out_gcm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
