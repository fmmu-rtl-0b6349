// fmmu_pkg: sizes, opcodes and packet formats shared by the Flash Map
// Management Unit (FMMU) blocks.
//
// The FMMU caches the page-level logical-to-physical map of an SSD in two
// levels. A data logical page number (DLPN) maps to a data physical page
// number (DPPN). One translation page of 4 KB holds 1024 consecutive 4-byte
// DPPNs and is itself addressed by a translation virtual page number (TVPN),
// which the global translation directory (GTD) maps to a translation physical
// page number (TPPN). The CMT caches 64-byte blocks (16 DPPNs); the CTP caches
// whole translation pages, stored as 64 rows of one CMT block each.
//
// From the paper: 4-byte DPPNs, 64-byte CMT blocks, 4 KB CTP blocks, 64 KB of
// CMT and 1024 KB of CTP, 4-way associativity, a 16 GB drive with 4 KB pages,
// the Lookup / Update / CondUpdate requests and the fields of the in-cache
// MSHRs. Field widths of request IDs and set/way fields, and the packet
// formats between blocks, are this design's own choices.
package fmmu_pkg;

  // ---- address sizes (16 GB / 4 KB pages = 4M logical pages) ----
  localparam int DLPN_W      = 22;
  localparam int PPN_W       = 32;   // DPPN and TPPN, 4 bytes each
  localparam int TVPN_W      = 12;   // 4M DLPNs / 1024 per translation page
  localparam int REQ_ID_W    = 16;

  // ---- cache block geometry ----
  localparam int CMT_ENTRIES = 16;   // DPPNs per 64 B CMT block
  localparam int CMT_OFF_W   = 4;
  localparam int TP_ROWS     = 64;   // CMT-block-sized rows per 4 KB translation page
  localparam int ROW_W       = 6;
  localparam int LINE_W      = CMT_ENTRIES * PPN_W;   // 512 bits = 64 B

  // ---- widths of set/way fields carried in packets (upper bounds) ----
  localparam int SET_FW      = 12;
  localparam int WAY_FW      = 4;
  localparam int SLOT_W      = 12;   // page-buffer slot number

  localparam logic [PPN_W-1:0] PPN_NONE = '1;   // unmapped entry

  typedef logic [LINE_W-1:0] line_t;

  // ---- HRM / GCM <-> CMT ----
  typedef enum logic [1:0] {
    OP_LOOKUP     = 2'd0,
    OP_UPDATE     = 2'd1,
    OP_CONDUPDATE = 2'd2
  } map_op_e;

  typedef struct packed {
    map_op_e               op;
    logic [REQ_ID_W-1:0]   id;
    logic [DLPN_W-1:0]     dlpn;
    logic [PPN_W-1:0]      dppn;      // new DPPN (Update, CondUpdate)
    logic [PPN_W-1:0]      old_dppn;  // expected current DPPN (CondUpdate)
  } map_req_t;

  typedef struct packed {
    map_op_e               op;
    logic [REQ_ID_W-1:0]   id;
    logic [DLPN_W-1:0]     dlpn;
    logic [PPN_W-1:0]      dppn;      // Lookup result; DPPN seen before the update otherwise
    logic                  applied;   // CondUpdate: map was changed
  } map_resp_t;

  // ---- CMT <-> CTP ----
  typedef enum logic {
    CTP_LOAD  = 1'b0,
    CTP_FLUSH = 1'b1
  } ctp_op_e;

  typedef struct packed {
    ctp_op_e               op;
    logic [TVPN_W-1:0]     tvpn;
    logic [ROW_W-1:0]      index;     // which 64 B row of the translation page
    logic [SET_FW-1:0]     cmt_set;
    logic [WAY_FW-1:0]     cmt_way;
    line_t                 data;      // FLUSH: the 16 DPPNs of the dirty CMT block
  } ctp_req_t;

  typedef struct packed {
    logic [SET_FW-1:0]     cmt_set;
    logic [WAY_FW-1:0]     cmt_way;
    line_t                 data;
  } ctp_resp_t;

  // ---- CTP <-> flash controller ----
  typedef struct packed {
    logic [PPN_W-1:0]      tppn;
    logic [SLOT_W-1:0]     slot;      // page-buffer slot that receives the page
  } fc_req_t;

  typedef struct packed {
    logic [SLOT_W-1:0]     slot;
  } fc_resp_t;

  // ---- CTP <-> block manager ----
  typedef struct packed {
    logic [TVPN_W-1:0]     tvpn;
    logic [SLOT_W-1:0]     slot;      // page-buffer slot that holds the page to program
  } bm_req_t;

  typedef struct packed {
    logic [TVPN_W-1:0]     tvpn;
    logic [PPN_W-1:0]      tppn;      // where the page was programmed
    logic [SLOT_W-1:0]     slot;
  } bm_resp_t;

  // ---- CMT in-cache MSHR (Fig. 8 fields; one LPN per request) ----
  localparam int CMT_MSHR_W     = 128;
  localparam int CMT_MSHR_SLOTS = LINE_W / CMT_MSHR_W;   // 4 per 64 B block

  typedef struct packed {
    logic [CMT_MSHR_W-111-1:0] pad;
    logic                  valid;
    map_op_e               op;
    logic                  src;       // 0: HRM, 1: GCM
    logic [REQ_ID_W-1:0]   id;
    logic [DLPN_W-1:0]     start_lpn;
    logic [4:0]            num_lpns;
    logic [PPN_W-1:0]      dppn;
    logic [PPN_W-1:0]      old_dppn;
  } cmt_mshr_t;

  // ---- CTP in-cache MSHR header (Fig. 10 fields, 4 bytes) ----
  localparam int CTP_HDR_W      = 32;
  localparam int CTP_MSHR_SLOTS = 15;  // headers in row 0, flush data in rows 1..15

  typedef struct packed {
    logic [CTP_HDR_W-24-1:0] pad;
    logic                  valid;
    ctp_op_e               op;
    logic [SET_FW-1:0]     cmt_set;
    logic [WAY_FW-1:0]     cmt_way;
    logic [ROW_W-1:0]      index;
  } ctp_mshr_t;

  // ---- one-cycle event pulses, for performance counters ----
  typedef struct packed {
    logic hit;          // request served from a loaded block
    logic miss;         // block allocated, load sent to the CTP
    logic merge;        // request logged in a block already waiting (secondary miss)
    logic blocked;      // request left in its queue (set full of dirty/transient blocks, MSHRs full, no room)
    logic resp;         // CTP response applied to a waiting block
    logic flush_tvpn;   // all dirty blocks of one translation page flushed
    logic flush_blk;    // one dirty block sent to the CTP
    logic cond_reject;  // CondUpdate not applied (map no longer holds the old DPPN)
  } cmt_ev_t;

  typedef struct packed {
    logic hit;          // load or flush served by a resident translation page
    logic miss;         // page allocated, flash read issued
    logic merge;        // request logged in a page already being read
    logic blocked;      // request left in its queue
    logic fill;         // flash read completed and MSHRs replayed
    logic flush;        // dirty translation page sent to the block manager
    logic gtd_update;   // program completion moved a TVPN in the GTD
  } ctp_ev_t;

endpackage
