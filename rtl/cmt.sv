// cmt: Cached Mapping Table, the first-level map cache of the FMMU.
//
// A set-associative cache of 64-byte blocks, each holding 16 consecutive
// DLPN-to-DPPN entries. It serves Lookup, Update and CondUpdate requests from
// the host request manager (HRM) and the garbage collection manager (GCM).
//
// How it works:
//  * The DLPN splits into {tag, set, offset}: offset = DLPN[3:0] selects the
//    entry in the block, the block number DLPN[21:4] is split into set (low
//    bits) and tag. The translation page of a block is TVPN = DLPN / 1024 and
//    its row in that page is (DLPN / 16) mod 64.
//  * Non-blocking misses use in-cache MSHRs. A miss allocates a block, marks
//    it transient and writes the request into the block's own data area (4
//    MSHR slots of 128 bits: valid, opcode, source, request ID, start LPN,
//    number of LPNs, new DPPN, old DPPN), then sends a LOAD to the CTP
//    carrying the block's set and way. Later requests to a transient block are
//    logged in its next free slot. The CTP's response names the set and way,
//    so no search is needed: the waiting requests are replayed in arrival
//    order on the arriving data, answered, and the block becomes a normal
//    (non-transient) block.
//  * Replacement is second chance among non-dirty, non-transient blocks of
//    the set, with one clock hand per set and a referenced bit per block.
//    Invalid ways are used first. If every way is dirty or transient the
//    request stays at the head of its queue; if every way is dirty, the CMT
//    flushes the translation page of way 0 to make room.
//  * A block that turns dirty is registered in the DTL and linked through its
//    next field to the other dirty blocks of the same translation page.
//    When the number of non-dirty blocks falls to LOW_WM the CMT enters flush
//    mode and alternates between flushing the dirty blocks of one translation
//    page (picked by the DTL) and serving one packet, until HIGH_WM non-dirty
//    blocks exist again. A flush walks the next chain and sends one FLUSH
//    packet per dirty block to the CTP; each block becomes clean at once
//    (the CTP now owns the newest copy of those entries).
//  * Input queues (HRM requests, GCM requests, CTP responses) are chosen by a
//    weighted round robin; the HRM and GCM weights are inputs so firmware can
//    change them at run time, the response weight is RESP_WEIGHT.
//
// Interface: queue heads are show-ahead (data visible while !empty, *_pop
// removes it). Output queues take *_push when !*_full. One packet is handled
// per cycle on a hit; a response with k waiting requests takes k+1 cycles;
// a flush of n blocks takes n+2 cycles plus the DTL walk.
//
// From the paper: the two-level structure, transient bit, in-cache MSHRs with
// the fields of its Fig. 8, set/way in the load request, second chance among
// non-dirty blocks, blocking when a set has only dirty blocks, DTL with next
// links, low/high watermark flushing alternating with requests, and weighted
// round robin with run-time HRM/GCM weights. This design's own choices: one
// LPN per request, 4 MSHR slots per block, the watermark values, flushing one
// whole translation page per turn, forcing a flush of a set that is entirely
// dirty, and no acknowledgment of flushes from the CTP.
module cmt
  import fmmu_pkg::*;
#(
  parameter int SETS        = 256,   // 64 KB / 64 B / 4 ways
  parameter int WAYS        = 4,
  parameter int LOW_WM      = SETS * WAYS / 8,
  parameter int HIGH_WM     = SETS * WAYS / 4,
  parameter int NUM_TVPN    = 4096,
  parameter int RESP_WEIGHT = 4,
  parameter int CTPQ_FREE_W = 7       // width of ctp_req_free
) (
  input  logic        clk,
  input  logic        rst_n,
  // HRM request / response queues
  input  map_req_t    hrm_req,
  input  logic        hrm_req_empty,
  output logic        hrm_req_pop,
  output map_resp_t   hrm_resp,
  output logic        hrm_resp_push,
  input  logic        hrm_resp_full,
  // GCM request / response queues
  input  map_req_t    gcm_req,
  input  logic        gcm_req_empty,
  output logic        gcm_req_pop,
  output map_resp_t   gcm_resp,
  output logic        gcm_resp_push,
  input  logic        gcm_resp_full,
  // CMT -> CTP request queue
  output ctp_req_t    ctp_req,
  output logic        ctp_req_push,
  input  logic [CTPQ_FREE_W-1:0] ctp_req_free,
  // CTP -> CMT response queue
  input  ctp_resp_t   ctp_resp,
  input  logic        ctp_resp_empty,
  output logic        ctp_resp_pop,
  // run-time arbitration weights
  input  logic [3:0]  hrm_weight,
  input  logic [3:0]  gcm_weight,
  // status
  output logic [$clog2(SETS*WAYS+1)-1:0] clean_blocks,
  output logic        flush_mode,
  output cmt_ev_t     ev
);
  localparam int NB    = SETS * WAYS;
  localparam int BID_W = $clog2(NB);
  localparam int SW    = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WYW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int BN_W  = DLPN_W - CMT_OFF_W;   // block number width
  localparam int TAG_W = BN_W - $clog2(SETS);
  localparam int CW    = $clog2(NB + 1);
  localparam int NSLOT = CMT_MSHR_SLOTS;

  // ------------------------------------------------------------------
  // storage: block metadata and the 64 B data/MSHR area of each block
  // ------------------------------------------------------------------
  logic             m_valid [NB];
  logic             m_trans [NB];
  logic             m_dirty [NB];
  logic             m_ref   [NB];
  logic             m_nextv [NB];
  logic [BID_W-1:0] m_next  [NB];
  logic [TAG_W-1:0] m_tag   [NB];
  line_t            data_mem[NB];
  logic [WYW-1:0]   hand    [SETS];
  logic [CW-1:0]    clean_cnt;

  assign clean_blocks = clean_cnt;

  function automatic logic [BID_W-1:0] bid(input logic [SW-1:0] s, input logic [WYW-1:0] w);
    return BID_W'(int'(s) * WAYS + int'(w));
  endfunction
  function automatic logic [BN_W-1:0] blk_num(input logic [BID_W-1:0] b);
    // block number of the DLPNs cached in block b
    return BN_W'(m_tag[b]) * BN_W'(SETS) + BN_W'(int'(b) / WAYS);
  endfunction
  function automatic logic [PPN_W-1:0] get_entry(input line_t l, input logic [CMT_OFF_W-1:0] o);
    return l[int'(o)*PPN_W +: PPN_W];
  endfunction

  // ------------------------------------------------------------------
  // DTL
  // ------------------------------------------------------------------
  logic                   d_mark_valid, d_mark_hit, d_touch_valid;
  logic [TVPN_W-1:0]      d_mark_tvpn, d_touch_tvpn, d_query_tvpn;
  logic [BID_W-1:0]       d_mark_blk, d_mark_old_next, d_query_first, d_sel_first;
  logic                   d_query_hit, d_sel_start, d_sel_busy, d_sel_done, d_sel_found;
  logic [BID_W-1:0]       d_query_idx, d_sel_idx, d_rm_idx;
  logic [TVPN_W-1:0]      d_sel_tvpn;
  logic [6:0]             d_query_count, d_sel_count;
  logic                   d_rm_valid;
  logic [$clog2(NB+1)-1:0] d_num;

  dtl #(.ENTRIES(NB), .NUM_TVPN(NUM_TVPN), .BID_W(BID_W)) u_dtl (
    .clk, .rst_n,
    .mark_valid(d_mark_valid), .mark_tvpn(d_mark_tvpn), .mark_blk(d_mark_blk),
    .mark_hit(d_mark_hit), .mark_old_next(d_mark_old_next),
    .touch_valid(d_touch_valid), .touch_tvpn(d_touch_tvpn),
    .query_tvpn(d_query_tvpn), .query_hit(d_query_hit), .query_idx(d_query_idx),
    .query_first_blk(d_query_first), .query_count(d_query_count),
    .sel_start(d_sel_start), .sel_busy(d_sel_busy), .sel_done(d_sel_done),
    .sel_found(d_sel_found), .sel_idx(d_sel_idx), .sel_tvpn(d_sel_tvpn),
    .sel_first_blk(d_sel_first), .sel_count(d_sel_count),
    .rm_valid(d_rm_valid), .rm_idx(d_rm_idx),
    .num_entries(d_num)
  );

  // ------------------------------------------------------------------
  // input arbitration: 0 = HRM requests, 1 = GCM requests, 2 = CTP responses
  // ------------------------------------------------------------------
  logic [1:0]       blocked;      // request queue whose head cannot be served now
  logic [2:0]       arb_req;
  logic [2:0][3:0]  arb_w;
  logic [1:0]       grant;
  logic             gnt_valid, arb_take;

  assign arb_req = {!ctp_resp_empty, !gcm_req_empty && !blocked[1], !hrm_req_empty && !blocked[0]};
  assign arb_w   = {4'(RESP_WEIGHT), gcm_weight, hrm_weight};

  wrr_arbiter #(.N(3), .WW(4)) u_arb (
    .clk, .rst_n, .req(arb_req), .weight(arb_w),
    .grant, .gnt_valid, .take(arb_take)
  );

  // ------------------------------------------------------------------
  // FSM
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {
    S_IDLE, S_RESP, S_SEL_WAIT, S_FLUSH_ROOM, S_FLUSH_WALK
  } state_e;
  state_e state;

  // response replay
  logic [BID_W-1:0]    r_blk;
  line_t               r_line;      // data being built
  logic [$clog2(NSLOT+1)-1:0] r_slot;
  logic                r_wrote;
  // flush
  logic [BID_W-1:0]    f_idx;       // DTL entry
  logic [BID_W-1:0]    f_cur;       // current block of the chain
  logic [6:0]          f_count;
  logic [TVPN_W-1:0]   f_tvpn;
  logic                flush_turn;  // in flush mode: flush next, then serve one packet
  logic                force_v;     // a set full of dirty blocks needs this TVPN flushed
  logic [TVPN_W-1:0]   force_tvpn;

  // ---- request decode ----
  map_req_t          rq;
  logic              rq_src;
  logic [BN_W-1:0]   rq_bn;
  logic [SW-1:0]     rq_set;
  logic [TAG_W-1:0]  rq_tag;
  logic [CMT_OFF_W-1:0] rq_off;
  assign rq_src = grant[0];
  assign rq     = rq_src ? gcm_req : hrm_req;
  assign rq_bn  = rq.dlpn[DLPN_W-1:CMT_OFF_W];
  assign rq_set = SW'(rq_bn % BN_W'(SETS));
  assign rq_tag = TAG_W'(rq_bn / BN_W'(SETS));
  assign rq_off = rq.dlpn[CMT_OFF_W-1:0];

  // ---- tag compare over the ways of the set ----
  logic             hit;
  logic [WYW-1:0]   hit_way;
  logic [BID_W-1:0] hit_b;
  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (m_valid[bid(rq_set, WYW'(w))] && m_tag[bid(rq_set, WYW'(w))] == rq_tag) begin
        hit = 1'b1;
        hit_way = WYW'(w);
      end
    end
  end
  assign hit_b = bid(rq_set, hit_way);

  // ---- second-chance victim choice in the request's set ----
  logic             vic_found, vic_any_trans;
  logic [WYW-1:0]   vic_way;
  logic [WAYS-1:0]  vic_clear_ref;   // ways whose referenced bit is consumed
  always_comb begin
    logic [WAYS-1:0] inval, cand, cand0;
    logic found_inval, found0, found_any;
    logic [WYW-1:0] w_inval, w0, w_any;
    int   wi;
    inval = '0; cand = '0; cand0 = '0;
    vic_any_trans = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      logic [BID_W-1:0] b;
      b = bid(rq_set, WYW'(w));
      inval[w] = !m_valid[b];
      cand[w]  = m_valid[b] && !m_dirty[b] && !m_trans[b];
      cand0[w] = cand[w] && !m_ref[b];
      if (m_valid[b] && m_trans[b]) vic_any_trans = 1'b1;
    end
    found_inval = 1'b0; found0 = 1'b0; found_any = 1'b0;
    w_inval = '0; w0 = '0; w_any = '0;
    for (int k = WAYS - 1; k >= 0; k--) begin
      wi = (int'(hand[rq_set]) + k) % WAYS;
      if (inval[wi]) begin found_inval = 1'b1; w_inval = WYW'(wi); end
      if (cand0[wi]) begin found0 = 1'b1;      w0 = WYW'(wi);      end
      if (cand[wi])  begin found_any = 1'b1;   w_any = WYW'(wi);   end
    end
    vic_clear_ref = '0;
    vic_found = found_inval || found_any;
    if (found_inval) begin
      vic_way = w_inval;
    end else if (found0) begin
      vic_way = w0;
      // referenced candidates passed over on the way from the hand lose their bit
      for (int k = 0; k < WAYS; k++) begin
        wi = (int'(hand[rq_set]) + k) % WAYS;
        if (WYW'(wi) == w0) break;
        if (cand[wi]) vic_clear_ref[wi] = 1'b1;
      end
    end else begin
      vic_way = w_any;
      vic_clear_ref = cand;           // every candidate had its second chance
    end
  end

  // ---- first free MSHR slot of the hit block ----
  cmt_mshr_t        hit_slots [NSLOT];
  logic             slot_free;
  logic [$clog2(NSLOT)-1:0] slot_idx;
  always_comb begin
    slot_free = 1'b0;
    slot_idx  = '0;
    for (int i = NSLOT - 1; i >= 0; i--) begin
      hit_slots[i] = data_mem[hit_b][i*CMT_MSHR_W +: CMT_MSHR_W];
      if (!hit_slots[i].valid) begin
        slot_free = 1'b1;
        slot_idx  = ($clog2(NSLOT))'(i);
      end
    end
  end

  // ---- MSHR of the request ----
  cmt_mshr_t new_mshr;
  always_comb begin
    new_mshr           = '0;
    new_mshr.valid     = 1'b1;
    new_mshr.op        = rq.op;
    new_mshr.src       = rq_src;
    new_mshr.id        = rq.id;
    new_mshr.start_lpn = rq.dlpn;
    new_mshr.num_lpns  = 5'd1;
    new_mshr.dppn      = rq.dppn;
    new_mshr.old_dppn  = rq.old_dppn;
  end

  // ---- response replay decode ----
  cmt_mshr_t        r_m;
  logic [PPN_W-1:0] r_cur;
  logic             r_cond_ok;
  logic             r_resp_full;
  assign r_m        = data_mem[r_blk][int'(r_slot[$clog2(NSLOT)-1:0])*CMT_MSHR_W +: CMT_MSHR_W];
  assign r_cur      = get_entry(r_line, r_m.start_lpn[CMT_OFF_W-1:0]);
  assign r_cond_ok  = (r_m.op != OP_CONDUPDATE) || (r_cur == r_m.old_dppn);
  assign r_resp_full = r_m.src ? gcm_resp_full : hrm_resp_full;

  // ---- flush decode ----
  logic [BN_W-1:0] f_bn;
  assign f_bn = blk_num(f_cur);

  // a flush is due in flush mode or when a set is all dirty, on its turn
  logic flush_due;
  assign flush_due = (force_v || flush_mode) && (flush_turn || !gnt_valid) && (d_num != '0);

  // ---- outputs and side effects, combinational part ----
  logic             rq_resp_full;
  assign rq_resp_full = rq_src ? gcm_resp_full : hrm_resp_full;

  map_resp_t        resp_o;
  logic             resp_push, resp_src;
  assign hrm_resp      = resp_o;
  assign gcm_resp      = resp_o;
  assign hrm_resp_push = resp_push && !resp_src;
  assign gcm_resp_push = resp_push &&  resp_src;

  // request outcome in S_IDLE
  typedef enum logic [2:0] {A_NONE, A_HIT, A_MERGE, A_MISS, A_BLOCK, A_RESP, A_FLUSH} act_e;
  act_e act;
  always_comb begin
    act = A_NONE;
    if (state == S_IDLE) begin
      if (flush_due) begin
        act = A_FLUSH;
      end else if (gnt_valid) begin
        if (grant == 2'd2) act = A_RESP;
        else if (hit && !m_trans[hit_b]) act = rq_resp_full ? A_BLOCK : A_HIT;
        else if (hit)                    act = slot_free ? A_MERGE : A_BLOCK;
        else if (vic_found && ctp_req_free != '0) act = A_MISS;
        else act = A_BLOCK;
      end
    end
  end

  logic [PPN_W-1:0] hit_cur;
  logic             hit_write;
  assign hit_cur   = get_entry(data_mem[hit_b], rq_off);
  assign hit_write = (rq.op == OP_UPDATE) || (rq.op == OP_CONDUPDATE && hit_cur == rq.old_dppn);

  always_comb begin
    hrm_req_pop   = 1'b0;
    gcm_req_pop   = 1'b0;
    ctp_resp_pop  = 1'b0;
    arb_take      = 1'b0;
    resp_push     = 1'b0;
    resp_src      = 1'b0;
    resp_o        = '0;
    ctp_req_push  = 1'b0;
    ctp_req       = '0;
    d_mark_valid  = 1'b0;
    d_mark_tvpn   = '0;
    d_mark_blk    = '0;
    d_touch_valid = 1'b0;
    d_touch_tvpn  = '0;
    d_sel_start   = 1'b0;
    d_rm_valid    = 1'b0;
    d_rm_idx      = f_idx;
    d_query_tvpn  = force_tvpn;
    ev            = '0;
    case (act)
      A_HIT: begin
        arb_take  = 1'b1;
        hrm_req_pop = !rq_src;
        gcm_req_pop =  rq_src;
        resp_push = 1'b1;
        resp_src  = rq_src;
        resp_o.op = rq.op;
        resp_o.id = rq.id;
        resp_o.dlpn = rq.dlpn;
        resp_o.dppn = hit_cur;
        resp_o.applied = hit_write;
        ev.hit = 1'b1;
        ev.cond_reject = (rq.op == OP_CONDUPDATE) && !hit_write;
        if (hit_write) begin
          if (!m_dirty[hit_b]) begin
            d_mark_valid = 1'b1;
            d_mark_tvpn  = TVPN_W'(rq_bn >> ROW_W);
            d_mark_blk   = hit_b;
          end else begin
            d_touch_valid = 1'b1;
            d_touch_tvpn  = TVPN_W'(rq_bn >> ROW_W);
          end
        end
      end
      A_MERGE: begin
        arb_take = 1'b1;
        hrm_req_pop = !rq_src;
        gcm_req_pop =  rq_src;
        ev.merge = 1'b1;
      end
      A_MISS: begin
        arb_take = 1'b1;
        hrm_req_pop = !rq_src;
        gcm_req_pop =  rq_src;
        ctp_req_push    = 1'b1;
        ctp_req.op      = CTP_LOAD;
        ctp_req.tvpn    = TVPN_W'(rq_bn >> ROW_W);
        ctp_req.index   = rq_bn[ROW_W-1:0];
        ctp_req.cmt_set = SET_FW'(rq_set);
        ctp_req.cmt_way = WAY_FW'(vic_way);
        ev.miss = 1'b1;
      end
      A_BLOCK: ev.blocked = 1'b1;
      A_RESP: begin
        arb_take     = 1'b1;
        ctp_resp_pop = 1'b1;
      end
      A_FLUSH: begin
        if (!force_v) d_sel_start = 1'b1;
      end
      default: ;
    endcase

    if (state == S_RESP) begin
      if (r_slot == ($clog2(NSLOT+1))'(NSLOT)) begin
        ev.resp = 1'b1;
        if (r_wrote && !m_dirty[r_blk]) begin
          d_mark_valid = 1'b1;
          d_mark_tvpn  = TVPN_W'(blk_num(r_blk) >> ROW_W);
          d_mark_blk   = r_blk;
        end
      end else if (r_m.valid && !r_resp_full) begin
        resp_push      = 1'b1;
        resp_src       = r_m.src;
        resp_o.op      = r_m.op;
        resp_o.id      = r_m.id;
        resp_o.dlpn    = r_m.start_lpn;
        resp_o.dppn    = r_cur;
        resp_o.applied = (r_m.op != OP_LOOKUP) && r_cond_ok;
        ev.cond_reject = (r_m.op == OP_CONDUPDATE) && !r_cond_ok;
      end
    end

    if (state == S_FLUSH_WALK) begin
      ctp_req_push    = 1'b1;
      ctp_req.op      = CTP_FLUSH;
      ctp_req.tvpn    = f_tvpn;
      ctp_req.index   = f_bn[ROW_W-1:0];
      ctp_req.cmt_set = SET_FW'(int'(f_cur) / WAYS);
      ctp_req.cmt_way = WAY_FW'(int'(f_cur) % WAYS);
      ctp_req.data    = data_mem[f_cur];
      ev.flush_blk    = 1'b1;
      if (!m_nextv[f_cur]) begin
        d_rm_valid    = 1'b1;
        ev.flush_tvpn = 1'b1;
      end
    end
  end

  // ------------------------------------------------------------------
  // sequential part
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      clean_cnt  <= CW'(NB);
      flush_mode <= 1'b0;
      flush_turn <= 1'b0;
      force_v    <= 1'b0;
      force_tvpn <= '0;
      blocked    <= '0;
      r_blk      <= '0;
      r_slot     <= '0;
      r_wrote    <= 1'b0;
      f_idx      <= '0;
      f_cur      <= '0;
      f_count    <= '0;
      f_tvpn     <= '0;
      for (int b = 0; b < NB; b++) begin
        m_valid[b] <= 1'b0;
        m_trans[b] <= 1'b0;
        m_dirty[b] <= 1'b0;
        m_ref[b]   <= 1'b0;
        m_nextv[b] <= 1'b0;
      end
      for (int s = 0; s < SETS; s++) hand[s] <= '0;
    end else begin
      // watermark hysteresis
      if (clean_cnt <= CW'(LOW_WM))       flush_mode <= 1'b1;
      else if (clean_cnt >= CW'(HIGH_WM)) flush_mode <= 1'b0;

      // a queue with nothing else to do retries its blocked head
      if (state == S_IDLE && !gnt_valid) blocked <= '0;

      case (state)
        S_IDLE: begin
          case (act)
            A_HIT: begin
              m_ref[hit_b] <= 1'b1;
              if (hit_write) begin
                data_mem[hit_b][int'(rq_off)*PPN_W +: PPN_W] <= rq.dppn;
                if (!m_dirty[hit_b]) begin
                  m_dirty[hit_b] <= 1'b1;
                  clean_cnt      <= clean_cnt - 1'b1;
                  m_nextv[hit_b] <= d_mark_hit;
                  m_next[hit_b]  <= d_mark_old_next;
                end
              end
              if (flush_mode || force_v) flush_turn <= 1'b1;
            end
            A_MERGE: begin
              data_mem[hit_b][int'(slot_idx)*CMT_MSHR_W +: CMT_MSHR_W] <= new_mshr;
              if (flush_mode || force_v) flush_turn <= 1'b1;
            end
            A_MISS: begin
              begin
                logic [BID_W-1:0] vb;
                vb = bid(rq_set, vic_way);
                m_valid[vb] <= 1'b1;
                m_trans[vb] <= 1'b1;
                m_dirty[vb] <= 1'b0;
                m_ref[vb]   <= 1'b0;
                m_nextv[vb] <= 1'b0;
                m_tag[vb]   <= rq_tag;
                data_mem[vb] <= line_t'(new_mshr);   // slot 0 holds the request, others invalid
                for (int w = 0; w < WAYS; w++)
                  if (vic_clear_ref[w]) m_ref[bid(rq_set, WYW'(w))] <= 1'b0;
                hand[rq_set] <= WYW'((int'(vic_way) + 1) % WAYS);
              end
              if (flush_mode || force_v) flush_turn <= 1'b1;
            end
            A_BLOCK: begin
              blocked[rq_src] <= 1'b1;
              // every way dirty: flush the translation page of way 0
              if (!hit && !vic_found && !vic_any_trans && !force_v) begin
                force_v    <= 1'b1;
                force_tvpn <= TVPN_W'(blk_num(bid(rq_set, '0)) >> ROW_W);
              end
            end
            A_RESP: begin
              r_blk   <= BID_W'(int'(ctp_resp.cmt_set) * WAYS + int'(ctp_resp.cmt_way));
              r_line  <= ctp_resp.data;
              r_slot  <= '0;
              r_wrote <= 1'b0;
              state   <= S_RESP;
              if (flush_mode || force_v) flush_turn <= 1'b1;
            end
            A_FLUSH: begin
              if (force_v && !d_query_hit) begin
                // the page was flushed meanwhile: the set has a clean block now
                force_v <= 1'b0;
              end else if (force_v) begin
                f_idx   <= d_query_idx;
                f_cur   <= d_query_first;
                f_count <= d_query_count;
                f_tvpn  <= force_tvpn;
                state   <= S_FLUSH_ROOM;
              end else begin
                state   <= S_SEL_WAIT;
              end
            end
            default: ;
          endcase
        end

        S_RESP: begin
          if (r_slot == ($clog2(NSLOT+1))'(NSLOT)) begin
            data_mem[r_blk] <= r_line;
            m_trans[r_blk]  <= 1'b0;
            m_ref[r_blk]    <= 1'b1;
            if (r_wrote && !m_dirty[r_blk]) begin
              m_dirty[r_blk] <= 1'b1;
              clean_cnt      <= clean_cnt - 1'b1;
              m_nextv[r_blk] <= d_mark_hit;
              m_next[r_blk]  <= d_mark_old_next;
            end
            blocked <= '0;
            state   <= S_IDLE;
          end else if (!r_m.valid) begin
            r_slot <= r_slot + 1'b1;
          end else if (!r_resp_full) begin
            if (r_m.op != OP_LOOKUP && r_cond_ok) begin
              r_line[int'(r_m.start_lpn[CMT_OFF_W-1:0])*PPN_W +: PPN_W] <= r_m.dppn;
              r_wrote <= 1'b1;
            end
            r_slot <= r_slot + 1'b1;
          end
        end

        S_SEL_WAIT: begin
          if (d_sel_done) begin
            if (d_sel_found) begin
              f_idx   <= d_sel_idx;
              f_cur   <= d_sel_first;
              f_count <= d_sel_count;
              f_tvpn  <= d_sel_tvpn;
              state   <= S_FLUSH_ROOM;
            end else begin
              state   <= S_IDLE;
            end
          end
        end

        S_FLUSH_ROOM: begin
          // start only when the whole chain fits in the CTP request queue
          // otherwise serve a packet first: the CTP may be waiting for the
          // CMT to drain its responses before it can take more requests
          if (ctp_req_free >= CTPQ_FREE_W'(f_count)) begin
            state <= S_FLUSH_WALK;
          end else begin
            flush_turn <= 1'b0;
            state      <= S_IDLE;
          end
        end

        S_FLUSH_WALK: begin
          m_dirty[f_cur] <= 1'b0;
          m_nextv[f_cur] <= 1'b0;
          clean_cnt      <= clean_cnt + 1'b1;
          f_cur          <= m_next[f_cur];
          if (!m_nextv[f_cur]) begin
            state      <= S_IDLE;
            flush_turn <= 1'b0;
            force_v    <= 1'b0;
            blocked    <= '0;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // a CTP answer is for a block still waiting for it
  assert property (@(posedge clk) disable iff (!rst_n)
    act == A_RESP |-> m_trans[BID_W'(int'(ctp_resp.cmt_set) * WAYS + int'(ctp_resp.cmt_way))]);
  // a flushed chain only holds dirty blocks
  assert property (@(posedge clk) disable iff (!rst_n) state == S_FLUSH_WALK |-> m_dirty[f_cur]);

endmodule
