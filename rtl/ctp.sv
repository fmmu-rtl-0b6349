// ctp: Cached Translation Page, the second-level map cache of the FMMU.
//
// A set-associative cache of whole 4 KB translation pages (1024 DPPNs each),
// stored as 64 rows of 64 bytes so that one row is exactly one CMT block. It
// serves the CMT's LOAD requests (return one row) and FLUSH requests (write
// one row of dirty entries), reads missing pages from flash through the
// flash controller (FC), and writes dirty pages back through the block
// manager (BM). It owns the Global Translation Directory (GTD).
//
// How it works:
//  * TVPN splits into set = TVPN mod SETS and tag = TVPN / SETS. Block b =
//    set*WAYS + way.
//  * A miss allocates a block by second chance among valid blocks that are
//    neither dirty, transient nor waiting for a program to finish (invalid
//    blocks first), marks it transient, and logs the request in the block
//    itself: row 0 holds up to 15 MSHR headers of 32 bits (valid, opcode,
//    CMT set, CMT way, row index); for a FLUSH the 64 bytes of entries go to
//    row 1+j of header j. The TPPN is read from the GTD and a flash read
//    (TPPN, page-buffer slot b) is sent to the FC. Later requests to the
//    transient block are logged behind the first. With all 15 headers used,
//    or no block free in the set, the request waits at the head of its queue.
//  * The FC places the page in page-buffer slot b of the SSD's RAM and
//    answers with the slot. The CTP then replays the MSHRs in arrival order:
//    a LOAD reads its row from the buffer and answers the CMT (set, way,
//    data); a FLUSH writes its row into the buffer. Last, the 64 rows are
//    copied from the buffer into the block, which stops being transient and
//    is dirty if any FLUSH was replayed.
//  * Pages that turn dirty are queued in the order of the CMT's flushes.
//    While more than FLUSH_THRESHOLD pages are dirty, the oldest is copied
//    into page-buffer slot NB+b and a program request (TVPN, slot) goes to the
//    BM; the block becomes clean but cannot be evicted until the BM answers
//    with the new TPPN, which is then written into the GTD. As in the CMT,
//    flushing alternates with serving packets. A miss that finds every page
//    of its set dirty or busy also starts flushing, below the threshold,
//    until it gets a page.
//  * The input queues (CMT requests, BM responses, FC responses) are chosen
//    by weighted round robin, responses weighted higher.
//
// Interface: queues as in the CMT (show-ahead heads, push when not full).
// Page-buffer port: pb_en with pb_we writes pb_wdata to (pb_slot, pb_row);
// pb_en without pb_we reads, and pb_rdata is valid in the next cycle. A LOAD
// hit is answered in one cycle; a fill takes about 2 cycles per MSHR plus
// 65 cycles for the copy; a flush takes 65 cycles.
//
// From the paper: the second-level cache of whole translation pages, in-cache
// MSHRs with the header fields of its Fig. 10 (the figure prints "CTP way" in
// the LOAD header; the CMT way is stored, since the response must name the
// CMT block), GTD lookup on a miss, flash read to the FC and program to the
// BM, second chance among non-dirty blocks, flushing in the order of the
// CMT's flushes above a threshold, weighted round robin with heavier
// response queues. This design's own choices: the row-0 header layout and
// 15 MSHRs per page, the page buffer as the place where flash data arrives,
// the threshold and weights, the "program pending" bit.
module ctp
  import fmmu_pkg::*;
#(
  parameter int SETS            = 64,    // 1024 KB / 4 KB / 4 ways
  parameter int WAYS            = 4,
  parameter int NUM_TVPN        = 4096,
  parameter int FLUSH_THRESHOLD = SETS * WAYS / 4,
  parameter int REQ_WEIGHT      = 1,
  parameter int BM_WEIGHT       = 2,
  parameter int FC_WEIGHT       = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // CMT -> CTP requests
  input  ctp_req_t    cmt_req,
  input  logic        cmt_req_empty,
  output logic        cmt_req_pop,
  // CTP -> CMT responses
  output ctp_resp_t   cmt_resp,
  output logic        cmt_resp_push,
  input  logic        cmt_resp_full,
  // flash controller
  output fc_req_t     fc_req,
  output logic        fc_req_push,
  input  logic        fc_req_full,
  input  fc_resp_t    fc_resp,
  input  logic        fc_resp_empty,
  output logic        fc_resp_pop,
  // block manager
  output bm_req_t     bm_req,
  output logic        bm_req_push,
  input  logic        bm_req_full,
  input  bm_resp_t    bm_resp,
  input  logic        bm_resp_empty,
  output logic        bm_resp_pop,
  // page buffer in SSD RAM
  output logic        pb_en,
  output logic        pb_we,
  output logic [SLOT_W-1:0] pb_slot,
  output logic [ROW_W-1:0]  pb_row,
  output line_t       pb_wdata,
  input  line_t       pb_rdata,
  // GTD power-up load
  input  logic        gtd_init_we,
  input  logic [TVPN_W-1:0] gtd_init_tvpn,
  input  logic [PPN_W-1:0]  gtd_init_tppn,
  // status
  output logic [$clog2(SETS*WAYS+1)-1:0] dirty_pages,
  output ctp_ev_t     ev
);
  localparam int NB    = SETS * WAYS;
  localparam int BID_W = $clog2(NB);
  localparam int SW    = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WYW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int TAG_W = TVPN_W - $clog2(SETS);
  localparam int CW    = $clog2(NB + 1);
  localparam int NSLOT = CTP_MSHR_SLOTS;
  localparam int JW    = $clog2(NSLOT + 1);

  // ------------------------------------------------------------------
  // storage
  // ------------------------------------------------------------------
  logic             m_valid [NB];
  logic             m_trans [NB];
  logic             m_dirty [NB];
  logic             m_ref   [NB];
  logic             m_pend  [NB];
  logic [TAG_W-1:0] m_tag   [NB];
  line_t            dmem    [NB * TP_ROWS];
  logic [WYW-1:0]   hand    [SETS];
  logic [CW-1:0]    dirty_cnt;
  assign dirty_pages = dirty_cnt;

  function automatic int row_addr(input logic [BID_W-1:0] b, input logic [ROW_W-1:0] r);
    return int'(b) * TP_ROWS + int'(r);
  endfunction
  function automatic logic [BID_W-1:0] bid(input logic [SW-1:0] s, input logic [WYW-1:0] w);
    return BID_W'(int'(s) * WAYS + int'(w));
  endfunction

  // ------------------------------------------------------------------
  // GTD
  // ------------------------------------------------------------------
  logic [TVPN_W-1:0] g_rd_tvpn;
  logic [PPN_W-1:0]  g_rd_tppn;
  logic              g_upd_we;
  gtd #(.NUM_TVPN(NUM_TVPN)) u_gtd (
    .clk,
    .rd_tvpn(g_rd_tvpn), .rd_tppn(g_rd_tppn),
    .upd_we(g_upd_we), .upd_tvpn(bm_resp.tvpn), .upd_tppn(bm_resp.tppn),
    .init_we(gtd_init_we), .init_tvpn(gtd_init_tvpn), .init_tppn(gtd_init_tppn)
  );

  // ------------------------------------------------------------------
  // order of dirty pages
  // ------------------------------------------------------------------
  logic              ord_push, ord_pop, ord_full, ord_empty;
  logic [TVPN_W-1:0] ord_wdata, ord_head;
  logic [CW-1:0]     ord_count, ord_free;
  fmmu_fifo #(.T(logic [TVPN_W-1:0]), .DEPTH(NB)) u_order (
    .clk, .rst_n,
    .push(ord_push), .wdata(ord_wdata), .full(ord_full),
    .pop(ord_pop), .rdata(ord_head), .empty(ord_empty),
    .count(ord_count), .free(ord_free)
  );

  // ------------------------------------------------------------------
  // arbitration: 0 = CMT requests, 1 = BM responses, 2 = FC responses
  // ------------------------------------------------------------------
  logic             blocked;
  logic [2:0]       arb_req;
  logic [2:0][3:0]  arb_w;
  logic [1:0]       grant;
  logic             gnt_valid, arb_take;
  assign arb_req = {!fc_resp_empty, !bm_resp_empty, !cmt_req_empty && !blocked};
  assign arb_w   = {4'(FC_WEIGHT), 4'(BM_WEIGHT), 4'(REQ_WEIGHT)};
  wrr_arbiter #(.N(3), .WW(4)) u_arb (
    .clk, .rst_n, .req(arb_req), .weight(arb_w),
    .grant, .gnt_valid, .take(arb_take)
  );

  // ------------------------------------------------------------------
  // request decode and lookup
  // ------------------------------------------------------------------
  logic [SW-1:0]    q_set;
  logic [TAG_W-1:0] q_tag;
  assign q_set = SW'(cmt_req.tvpn % TVPN_W'(SETS));
  assign q_tag = TAG_W'(cmt_req.tvpn / TVPN_W'(SETS));

  logic             hit;
  logic [WYW-1:0]   hit_way;
  logic [BID_W-1:0] hit_b;
  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (m_valid[bid(q_set, WYW'(w))] && m_tag[bid(q_set, WYW'(w))] == q_tag) begin
        hit = 1'b1;
        hit_way = WYW'(w);
      end
  end
  assign hit_b = bid(q_set, hit_way);

  // second-chance victim
  logic             vic_found;
  logic [WYW-1:0]   vic_way;
  logic [WAYS-1:0]  vic_clear_ref;
  always_comb begin
    logic [WAYS-1:0] inval, cand, cand0;
    logic found_inval, found0, found_any;
    logic [WYW-1:0] w_inval, w0, w_any;
    int   wi;
    inval = '0; cand = '0; cand0 = '0;
    for (int w = 0; w < WAYS; w++) begin
      logic [BID_W-1:0] b;
      b = bid(q_set, WYW'(w));
      inval[w] = !m_valid[b];
      cand[w]  = m_valid[b] && !m_dirty[b] && !m_trans[b] && !m_pend[b];
      cand0[w] = cand[w] && !m_ref[b];
    end
    found_inval = 1'b0; found0 = 1'b0; found_any = 1'b0;
    w_inval = '0; w0 = '0; w_any = '0;
    for (int k = WAYS - 1; k >= 0; k--) begin
      wi = (int'(hand[q_set]) + k) % WAYS;
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
      for (int k = 0; k < WAYS; k++) begin
        wi = (int'(hand[q_set]) + k) % WAYS;
        if (WYW'(wi) == w0) break;
        if (cand[wi]) vic_clear_ref[wi] = 1'b1;
      end
    end else begin
      vic_way = w_any;
      vic_clear_ref = cand;
    end
  end
  logic [BID_W-1:0] vic_b;
  assign vic_b = bid(q_set, vic_way);

  // first free MSHR header of the hit block
  line_t            hit_hdr_row;
  logic             hdr_free;
  logic [JW-1:0]    hdr_idx;
  assign hit_hdr_row = dmem[row_addr(hit_b, '0)];
  always_comb begin
    ctp_mshr_t h;
    hdr_free = 1'b0;
    hdr_idx  = '0;
    for (int j = NSLOT - 1; j >= 0; j--) begin
      h = hit_hdr_row[j*CTP_HDR_W +: CTP_HDR_W];
      if (!h.valid) begin
        hdr_free = 1'b1;
        hdr_idx  = JW'(j);
      end
    end
  end

  ctp_mshr_t new_hdr;
  always_comb begin
    new_hdr         = '0;
    new_hdr.valid   = 1'b1;
    new_hdr.op      = cmt_req.op;
    new_hdr.cmt_set = cmt_req.cmt_set;
    new_hdr.cmt_way = cmt_req.cmt_way;
    new_hdr.index   = cmt_req.index;
  end

  // flush candidate: oldest dirty page
  logic [SW-1:0]    o_set;
  logic [TAG_W-1:0] o_tag;
  logic             o_hit;
  logic [BID_W-1:0] o_b;
  assign o_set = SW'(ord_head % TVPN_W'(SETS));
  assign o_tag = TAG_W'(ord_head / TVPN_W'(SETS));
  always_comb begin
    o_hit = 1'b0;
    o_b   = bid(o_set, '0);
    for (int w = WAYS - 1; w >= 0; w--)
      if (m_valid[bid(o_set, WYW'(w))] && m_tag[bid(o_set, WYW'(w))] == o_tag) begin
        o_hit = 1'b1;
        o_b   = bid(o_set, WYW'(w));
      end
  end

  // ------------------------------------------------------------------
  // FSM
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {S_IDLE, S_FILL_MSHR, S_FILL_COPY, S_FLUSH_COPY} state_e;
  state_e state;

  logic [BID_W-1:0] c_b;          // block being filled or flushed
  line_t            c_hdr;        // latched MSHR header row
  logic [JW-1:0]    c_j;          // MSHR being replayed
  logic             c_phase;      // LOAD replay: 0 = read issued next, 1 = data arriving
  logic [6:0]       c_r;          // row counter for copies
  logic             c_any_flush;
  logic             flush_turn;
  logic             need_clean;   // a miss found its set full of dirty or busy pages

  ctp_mshr_t        c_m;
  assign c_m = c_hdr[int'(c_j[$clog2(NSLOT)-1:0])*CTP_HDR_W +: CTP_HDR_W];

  logic flush_due;
  assign flush_due = ((dirty_cnt > CW'(FLUSH_THRESHOLD)) || need_clean) && !ord_empty && o_hit &&
                     !m_pend[o_b] && !bm_req_full && (flush_turn || !gnt_valid);

  typedef enum logic [2:0] {A_NONE, A_HIT, A_MERGE, A_MISS, A_BLOCK, A_BM, A_FC, A_FLUSH} act_e;
  act_e act;
  always_comb begin
    act = A_NONE;
    if (state == S_IDLE) begin
      if (flush_due) act = A_FLUSH;
      else if (gnt_valid) begin
        if (grant == 2'd1)      act = A_BM;
        else if (grant == 2'd2) act = A_FC;
        else if (hit && !m_trans[hit_b])
          act = (cmt_req.op == CTP_LOAD && cmt_resp_full) ? A_BLOCK : A_HIT;
        else if (hit)
          act = hdr_free ? A_MERGE : A_BLOCK;
        else if (vic_found && !fc_req_full) act = A_MISS;
        else act = A_BLOCK;
      end
    end
  end

  always_comb begin
    cmt_req_pop   = 1'b0;
    fc_resp_pop   = 1'b0;
    bm_resp_pop   = 1'b0;
    arb_take      = 1'b0;
    cmt_resp_push = 1'b0;
    cmt_resp      = '0;
    fc_req_push   = 1'b0;
    fc_req        = '0;
    bm_req_push   = 1'b0;
    bm_req        = '0;
    pb_en         = 1'b0;
    pb_we         = 1'b0;
    pb_slot       = SLOT_W'(c_b);
    pb_row        = '0;
    pb_wdata      = '0;
    g_rd_tvpn     = cmt_req.tvpn;
    g_upd_we      = 1'b0;
    ord_push      = 1'b0;
    ord_wdata     = cmt_req.tvpn;
    ord_pop       = 1'b0;
    ev            = '0;
    case (act)
      A_HIT: begin
        arb_take    = 1'b1;
        cmt_req_pop = 1'b1;
        ev.hit      = 1'b1;
        if (cmt_req.op == CTP_LOAD) begin
          cmt_resp_push    = 1'b1;
          cmt_resp.cmt_set = cmt_req.cmt_set;
          cmt_resp.cmt_way = cmt_req.cmt_way;
          cmt_resp.data    = dmem[row_addr(hit_b, cmt_req.index)];
        end else if (!m_dirty[hit_b]) begin
          ord_push = 1'b1;
        end
      end
      A_MERGE: begin
        arb_take    = 1'b1;
        cmt_req_pop = 1'b1;
        ev.merge    = 1'b1;
      end
      A_MISS: begin
        arb_take    = 1'b1;
        cmt_req_pop = 1'b1;
        fc_req_push = 1'b1;
        fc_req.tppn = g_rd_tppn;
        fc_req.slot = SLOT_W'(vic_b);
        ev.miss     = 1'b1;
      end
      A_BLOCK: ev.blocked = 1'b1;
      A_BM: begin
        arb_take    = 1'b1;
        bm_resp_pop = 1'b1;
        g_upd_we    = 1'b1;
        ev.gtd_update = 1'b1;
      end
      A_FC: begin
        arb_take    = 1'b1;
        fc_resp_pop = 1'b1;
      end
      A_FLUSH: ;
      default: ;
    endcase

    case (state)
      S_FILL_MSHR: begin
        if (c_j != JW'(NSLOT) && c_m.valid) begin
          if (c_m.op == CTP_FLUSH) begin
            pb_en    = 1'b1;
            pb_we    = 1'b1;
            pb_row   = c_m.index;
            pb_wdata = dmem[row_addr(c_b, ROW_W'(int'(c_j) + 1))];
          end else if (!c_phase) begin
            if (!cmt_resp_full) begin
              pb_en  = 1'b1;
              pb_row = c_m.index;
            end
          end else begin
            cmt_resp_push    = 1'b1;
            cmt_resp.cmt_set = c_m.cmt_set;
            cmt_resp.cmt_way = c_m.cmt_way;
            cmt_resp.data    = pb_rdata;
          end
        end
      end
      S_FILL_COPY: begin
        // read row c_r while the previous row is written into the block
        if (c_r < 7'(TP_ROWS)) begin
          pb_en  = 1'b1;
          pb_row = c_r[ROW_W-1:0];
        end
        if (c_r == 7'(TP_ROWS) && c_any_flush && !m_dirty[c_b]) begin
          ord_push  = 1'b1;
          ord_wdata = TVPN_W'(int'(m_tag[c_b]) * SETS + int'(c_b) / WAYS);
        end
        if (c_r == 7'(TP_ROWS)) ev.fill = 1'b1;
      end
      S_FLUSH_COPY: begin
        pb_slot = SLOT_W'(NB + int'(c_b));
        if (c_r < 7'(TP_ROWS)) begin
          pb_en    = 1'b1;
          pb_we    = 1'b1;
          pb_row   = c_r[ROW_W-1:0];
          pb_wdata = dmem[row_addr(c_b, c_r[ROW_W-1:0])];
        end else begin
          bm_req_push = 1'b1;
          bm_req.tvpn = ord_head;
          bm_req.slot = SLOT_W'(NB + int'(c_b));
          ord_pop     = 1'b1;
          ev.flush    = 1'b1;
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // sequential part
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      dirty_cnt   <= '0;
      blocked     <= 1'b0;
      flush_turn  <= 1'b0;
      need_clean  <= 1'b0;
      c_b         <= '0;
      c_hdr       <= '0;
      c_j         <= '0;
      c_phase     <= 1'b0;
      c_r         <= '0;
      c_any_flush <= 1'b0;
      for (int b = 0; b < NB; b++) begin
        m_valid[b] <= 1'b0;
        m_trans[b] <= 1'b0;
        m_dirty[b] <= 1'b0;
        m_ref[b]   <= 1'b0;
        m_pend[b]  <= 1'b0;
      end
      for (int s = 0; s < SETS; s++) hand[s] <= '0;
    end else begin
      if (state == S_IDLE && !gnt_valid) blocked <= 1'b0;
      if (act inside {A_HIT, A_MERGE, A_MISS, A_BM, A_FC}) flush_turn <= 1'b1;

      case (state)
        S_IDLE: begin
          case (act)
            A_HIT: begin
              m_ref[hit_b] <= 1'b1;
              if (cmt_req.op == CTP_FLUSH) begin
                dmem[row_addr(hit_b, cmt_req.index)] <= cmt_req.data;
                if (!m_dirty[hit_b]) begin
                  m_dirty[hit_b] <= 1'b1;
                  dirty_cnt      <= dirty_cnt + 1'b1;
                end
              end
            end
            A_MERGE: begin
              dmem[row_addr(hit_b, '0)][int'(hdr_idx)*CTP_HDR_W +: CTP_HDR_W] <= new_hdr;
              if (cmt_req.op == CTP_FLUSH)
                dmem[row_addr(hit_b, ROW_W'(int'(hdr_idx) + 1))] <= cmt_req.data;
            end
            A_MISS: begin
              need_clean     <= 1'b0;
              m_valid[vic_b] <= 1'b1;
              m_trans[vic_b] <= 1'b1;
              m_dirty[vic_b] <= 1'b0;
              m_ref[vic_b]   <= 1'b0;
              m_tag[vic_b]   <= q_tag;
              dmem[row_addr(vic_b, '0)] <= line_t'(new_hdr);
              if (cmt_req.op == CTP_FLUSH)
                dmem[row_addr(vic_b, ROW_W'(1))] <= cmt_req.data;
              for (int w = 0; w < WAYS; w++)
                if (vic_clear_ref[w]) m_ref[bid(q_set, WYW'(w))] <= 1'b0;
              hand[q_set] <= WYW'((int'(vic_way) + 1) % WAYS);
            end
            A_BLOCK: begin
              blocked <= 1'b1;
              if (!hit && !vic_found) need_clean <= 1'b1;
            end
            A_BM: begin
              m_pend[BID_W'(int'(bm_resp.slot) - NB)] <= 1'b0;
              blocked <= 1'b0;
            end
            A_FC: begin
              c_b         <= BID_W'(fc_resp.slot);
              c_hdr       <= dmem[row_addr(BID_W'(fc_resp.slot), '0)];
              c_j         <= '0;
              c_phase     <= 1'b0;
              c_any_flush <= 1'b0;
              state       <= S_FILL_MSHR;
            end
            A_FLUSH: begin
              c_b        <= o_b;
              c_r        <= '0;
              flush_turn <= 1'b0;
              state      <= S_FLUSH_COPY;
            end
            default: ;
          endcase
        end

        S_FILL_MSHR: begin
          if (c_j == JW'(NSLOT) || !c_m.valid) begin
            // headers are filled in order: the first empty one ends the list
            c_r   <= '0;
            state <= S_FILL_COPY;
          end else if (c_m.op == CTP_FLUSH) begin
            c_any_flush <= 1'b1;
            c_j <= c_j + 1'b1;
          end else if (!c_phase) begin
            if (!cmt_resp_full) c_phase <= 1'b1;
          end else begin
            c_phase <= 1'b0;
            c_j <= c_j + 1'b1;
          end
        end

        S_FILL_COPY: begin
          if (c_r != '0) dmem[row_addr(c_b, ROW_W'(int'(c_r) - 1))] <= pb_rdata;
          if (c_r == 7'(TP_ROWS)) begin
            m_trans[c_b] <= 1'b0;
            m_ref[c_b]   <= 1'b1;
            if (c_any_flush && !m_dirty[c_b]) begin
              m_dirty[c_b] <= 1'b1;
              dirty_cnt    <= dirty_cnt + 1'b1;
            end
            blocked <= 1'b0;
            state   <= S_IDLE;
          end
          c_r <= c_r + 1'b1;
        end

        S_FLUSH_COPY: begin
          if (c_r == 7'(TP_ROWS)) begin
            m_dirty[c_b] <= 1'b0;
            m_pend[c_b]  <= 1'b1;
            dirty_cnt    <= dirty_cnt - 1'b1;
            state        <= S_IDLE;
          end
          c_r <= c_r + 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // the page at the head of the flush order is resident and dirty when flushed
  assert property (@(posedge clk) disable iff (!rst_n) act == A_FLUSH |-> m_dirty[o_b]);
  // a flash read completes into a block waiting for it
  assert property (@(posedge clk) disable iff (!rst_n) act == A_FC |-> m_trans[BID_W'(fc_resp.slot)]);
  // a program completion names a block waiting for it
  assert property (@(posedge clk) disable iff (!rst_n) act == A_BM |-> m_pend[BID_W'(int'(bm_resp.slot) - NB)]);

endmodule
