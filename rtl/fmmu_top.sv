// fmmu_top: the Flash Map Management Unit.
//
// Translates data logical page numbers to data physical page numbers for an
// SSD whose full page-level map lives in flash. The firmware's host request
// manager (HRM) and garbage collection manager (GCM) send Lookup, Update and
// CondUpdate packets; the FMMU answers from a two-level cache (CMT, then
// CTP), fetching translation pages through the flash controller (FC) and
// writing dirty ones back through the block manager (BM), without blocking
// on misses: any number of misses can be outstanding, limited only by cache
// blocks and their in-cache MSHR slots.
//
// Structure (every arrow is its own queue, so no queue is shared):
//
//   HRM req --\                          /-- CTP->CMT resp --\
//   GCM req ---> WRR -> CMT(+DTL) -> CMT->CTP req ---> WRR -> CTP(+GTD) -> FC req, BM req
//   CTP resp -/     \-> HRM/GCM resp          FC resp, BM resp -/
//
// External interfaces are valid/ready queue ends: *_valid/*_ready/* on each
// side; a packet moves when valid and ready are both high at a clock edge.
// The page-buffer port reaches the SSD RAM where the FC puts pages it reads
// and the BM takes pages it programs (read data one cycle after the read).
// The GTD init port loads the directory at power-up. hrm_weight and
// gcm_weight are the run-time arbitration weights of the two request queues.
// Event pulses of both caches are brought out for performance counters.
//
// The block structure, queues and arbitration follow the paper; queue depths,
// packet formats, the valid/ready convention and the page-buffer port are
// this design's.
module fmmu_top
  import fmmu_pkg::*;
#(
  parameter int CMT_SETS        = 256,
  parameter int CMT_WAYS        = 4,
  parameter int CMT_LOW_WM      = CMT_SETS * CMT_WAYS / 8,
  parameter int CMT_HIGH_WM     = CMT_SETS * CMT_WAYS / 4,
  parameter int CTP_SETS        = 64,
  parameter int CTP_WAYS        = 4,
  parameter int CTP_FLUSH_THRESHOLD = CTP_SETS * CTP_WAYS / 4,
  parameter int NUM_TVPN        = 4096,
  parameter int QDEPTH          = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // HRM
  input  logic        hrm_req_valid,
  output logic        hrm_req_ready,
  input  map_req_t    hrm_req,
  output logic        hrm_resp_valid,
  input  logic        hrm_resp_ready,
  output map_resp_t   hrm_resp,
  // GCM
  input  logic        gcm_req_valid,
  output logic        gcm_req_ready,
  input  map_req_t    gcm_req,
  output logic        gcm_resp_valid,
  input  logic        gcm_resp_ready,
  output map_resp_t   gcm_resp,
  // flash controller
  output logic        fc_req_valid,
  input  logic        fc_req_ready,
  output fc_req_t     fc_req,
  input  logic        fc_resp_valid,
  output logic        fc_resp_ready,
  input  fc_resp_t    fc_resp,
  // block manager
  output logic        bm_req_valid,
  input  logic        bm_req_ready,
  output bm_req_t     bm_req,
  input  logic        bm_resp_valid,
  output logic        bm_resp_ready,
  input  bm_resp_t    bm_resp,
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
  // run-time weights of the HRM and GCM request queues
  input  logic [3:0]  hrm_weight,
  input  logic [3:0]  gcm_weight,
  // status and events
  output logic        cmt_flush_mode,
  output cmt_ev_t     cmt_ev,
  output ctp_ev_t     ctp_ev
);
  localparam int CQ = 64;   // CMT->CTP queue holds a whole flushed page (64 blocks)
  localparam int QW = $clog2(QDEPTH + 1);

  // ---------------- HRM / GCM queues ----------------
  map_req_t  hrm_q_rd, gcm_q_rd;
  logic      hrm_q_empty, gcm_q_empty, hrm_q_pop, gcm_q_pop, hrm_q_full, gcm_q_full;
  map_resp_t hrm_r_wd, gcm_r_wd;
  logic      hrm_r_push, gcm_r_push, hrm_r_full, gcm_r_full, hrm_r_empty, gcm_r_empty;
  logic [QW-1:0] unused_c0, unused_f0, unused_c1, unused_f1, unused_c2, unused_f2, unused_c3, unused_f3;

  fmmu_fifo #(.T(map_req_t), .DEPTH(QDEPTH)) u_hrm_req_q (
    .clk, .rst_n, .push(hrm_req_valid && !hrm_q_full), .wdata(hrm_req), .full(hrm_q_full),
    .pop(hrm_q_pop), .rdata(hrm_q_rd), .empty(hrm_q_empty), .count(unused_c0), .free(unused_f0));
  assign hrm_req_ready = !hrm_q_full;

  fmmu_fifo #(.T(map_req_t), .DEPTH(QDEPTH)) u_gcm_req_q (
    .clk, .rst_n, .push(gcm_req_valid && !gcm_q_full), .wdata(gcm_req), .full(gcm_q_full),
    .pop(gcm_q_pop), .rdata(gcm_q_rd), .empty(gcm_q_empty), .count(unused_c1), .free(unused_f1));
  assign gcm_req_ready = !gcm_q_full;

  fmmu_fifo #(.T(map_resp_t), .DEPTH(QDEPTH)) u_hrm_resp_q (
    .clk, .rst_n, .push(hrm_r_push), .wdata(hrm_r_wd), .full(hrm_r_full),
    .pop(hrm_resp_ready && !hrm_r_empty), .rdata(hrm_resp), .empty(hrm_r_empty), .count(unused_c2), .free(unused_f2));
  assign hrm_resp_valid = !hrm_r_empty;

  fmmu_fifo #(.T(map_resp_t), .DEPTH(QDEPTH)) u_gcm_resp_q (
    .clk, .rst_n, .push(gcm_r_push), .wdata(gcm_r_wd), .full(gcm_r_full),
    .pop(gcm_resp_ready && !gcm_r_empty), .rdata(gcm_resp), .empty(gcm_r_empty), .count(unused_c3), .free(unused_f3));
  assign gcm_resp_valid = !gcm_r_empty;

  // ---------------- CMT <-> CTP queues ----------------
  ctp_req_t  c2p_wd, c2p_rd;
  logic      c2p_push, c2p_full, c2p_pop, c2p_empty;
  logic [$clog2(CQ+1)-1:0] c2p_count, c2p_free;
  ctp_resp_t p2c_wd, p2c_rd;
  logic      p2c_push, p2c_full, p2c_pop, p2c_empty;
  logic [QW-1:0] unused_c4, unused_f4;

  fmmu_fifo #(.T(ctp_req_t), .DEPTH(CQ)) u_cmt2ctp_q (
    .clk, .rst_n, .push(c2p_push), .wdata(c2p_wd), .full(c2p_full),
    .pop(c2p_pop), .rdata(c2p_rd), .empty(c2p_empty), .count(c2p_count), .free(c2p_free));

  fmmu_fifo #(.T(ctp_resp_t), .DEPTH(QDEPTH)) u_ctp2cmt_q (
    .clk, .rst_n, .push(p2c_push), .wdata(p2c_wd), .full(p2c_full),
    .pop(p2c_pop), .rdata(p2c_rd), .empty(p2c_empty), .count(unused_c4), .free(unused_f4));

  // ---------------- FC / BM queues ----------------
  logic fcq_push, fcq_full, fcq_empty, fcr_pop, fcr_empty, fcr_full;
  logic bmq_push, bmq_full, bmq_empty, bmr_pop, bmr_empty, bmr_full;
  fc_req_t  fcq_wd;
  fc_resp_t fcr_rd;
  bm_req_t  bmq_wd;
  bm_resp_t bmr_rd;
  logic [QW-1:0] unused_c5, unused_f5, unused_c6, unused_f6, unused_c7, unused_f7, unused_c8, unused_f8;

  fmmu_fifo #(.T(fc_req_t), .DEPTH(QDEPTH)) u_fc_req_q (
    .clk, .rst_n, .push(fcq_push), .wdata(fcq_wd), .full(fcq_full),
    .pop(fc_req_ready && !fcq_empty), .rdata(fc_req), .empty(fcq_empty), .count(unused_c5), .free(unused_f5));
  assign fc_req_valid = !fcq_empty;

  fmmu_fifo #(.T(fc_resp_t), .DEPTH(QDEPTH)) u_fc_resp_q (
    .clk, .rst_n, .push(fc_resp_valid && !fcr_full), .wdata(fc_resp), .full(fcr_full),
    .pop(fcr_pop), .rdata(fcr_rd), .empty(fcr_empty), .count(unused_c6), .free(unused_f6));
  assign fc_resp_ready = !fcr_full;

  fmmu_fifo #(.T(bm_req_t), .DEPTH(QDEPTH)) u_bm_req_q (
    .clk, .rst_n, .push(bmq_push), .wdata(bmq_wd), .full(bmq_full),
    .pop(bm_req_ready && !bmq_empty), .rdata(bm_req), .empty(bmq_empty), .count(unused_c7), .free(unused_f7));
  assign bm_req_valid = !bmq_empty;

  fmmu_fifo #(.T(bm_resp_t), .DEPTH(QDEPTH)) u_bm_resp_q (
    .clk, .rst_n, .push(bm_resp_valid && !bmr_full), .wdata(bm_resp), .full(bmr_full),
    .pop(bmr_pop), .rdata(bmr_rd), .empty(bmr_empty), .count(unused_c8), .free(unused_f8));
  assign bm_resp_ready = !bmr_full;

  // ---------------- CMT ----------------
  logic [$clog2(CMT_SETS*CMT_WAYS+1)-1:0] cmt_clean;

  cmt #(
    .SETS(CMT_SETS), .WAYS(CMT_WAYS), .LOW_WM(CMT_LOW_WM), .HIGH_WM(CMT_HIGH_WM),
    .NUM_TVPN(NUM_TVPN), .CTPQ_FREE_W($clog2(CQ+1))
  ) u_cmt (
    .clk, .rst_n,
    .hrm_req(hrm_q_rd), .hrm_req_empty(hrm_q_empty), .hrm_req_pop(hrm_q_pop),
    .hrm_resp(hrm_r_wd), .hrm_resp_push(hrm_r_push), .hrm_resp_full(hrm_r_full),
    .gcm_req(gcm_q_rd), .gcm_req_empty(gcm_q_empty), .gcm_req_pop(gcm_q_pop),
    .gcm_resp(gcm_r_wd), .gcm_resp_push(gcm_r_push), .gcm_resp_full(gcm_r_full),
    .ctp_req(c2p_wd), .ctp_req_push(c2p_push), .ctp_req_free(c2p_free),
    .ctp_resp(p2c_rd), .ctp_resp_empty(p2c_empty), .ctp_resp_pop(p2c_pop),
    .hrm_weight, .gcm_weight,
    .clean_blocks(cmt_clean), .flush_mode(cmt_flush_mode), .ev(cmt_ev)
  );

  // ---------------- CTP ----------------
  logic [$clog2(CTP_SETS*CTP_WAYS+1)-1:0] ctp_dirty;

  ctp #(
    .SETS(CTP_SETS), .WAYS(CTP_WAYS), .NUM_TVPN(NUM_TVPN),
    .FLUSH_THRESHOLD(CTP_FLUSH_THRESHOLD)
  ) u_ctp (
    .clk, .rst_n,
    .cmt_req(c2p_rd), .cmt_req_empty(c2p_empty), .cmt_req_pop(c2p_pop),
    .cmt_resp(p2c_wd), .cmt_resp_push(p2c_push), .cmt_resp_full(p2c_full),
    .fc_req(fcq_wd), .fc_req_push(fcq_push), .fc_req_full(fcq_full),
    .fc_resp(fcr_rd), .fc_resp_empty(fcr_empty), .fc_resp_pop(fcr_pop),
    .bm_req(bmq_wd), .bm_req_push(bmq_push), .bm_req_full(bmq_full),
    .bm_resp(bmr_rd), .bm_resp_empty(bmr_empty), .bm_resp_pop(bmr_pop),
    .pb_en, .pb_we, .pb_slot, .pb_row, .pb_wdata, .pb_rdata,
    .gtd_init_we, .gtd_init_tvpn, .gtd_init_tppn,
    .dirty_pages(ctp_dirty), .ev(ctp_ev)
  );

  // the CMT pushes to the CTP queue only after checking its free space
  assert property (@(posedge clk) disable iff (!rst_n) !(c2p_push && c2p_full));

endmodule
