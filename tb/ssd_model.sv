// ssd_model: behavioural model of what surrounds the FMMU in an SSD
// controller: the flash controller with its NAND, the block manager's program
// path for translation pages, and the page buffer in SSD RAM. Not
// synthesizable; testbench use only.
//
// Flash: translation page contents are kept sparsely. A TPPN below NUM_TVPN
// that was never programmed holds the power-up translation page of TVPN =
// TPPN, whose entry for DLPN d is init_dppn(d). Programmed pages are stored.
// FC: each read request (TPPN, slot) completes after a random delay of
// FC_MIN..FC_MAX cycles, in any order; the page is then copied into the
// page-buffer slot and the slot number is returned. BM: each program request
// (TVPN, slot) copies the slot into a fresh TPPN (counting up from NUM_TVPN)
// and answers after BM_LAT cycles. Page buffer: one port, read data one cycle
// after the read.
module ssd_model
  import fmmu_pkg::*;
#(
  parameter int NUM_TVPN = 4096,
  parameter int NSLOTS   = 512,
  parameter int FC_MIN   = 20,
  parameter int FC_MAX   = 200,
  parameter int BM_LAT   = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fc_req_valid,
  output logic        fc_req_ready,
  input  fc_req_t     fc_req,
  output logic        fc_resp_valid,
  input  logic        fc_resp_ready,
  output fc_resp_t    fc_resp,
  input  logic        bm_req_valid,
  output logic        bm_req_ready,
  input  bm_req_t     bm_req,
  output logic        bm_resp_valid,
  input  logic        bm_resp_ready,
  output bm_resp_t    bm_resp,
  input  logic        pb_en,
  input  logic        pb_we,
  input  logic [SLOT_W-1:0] pb_slot,
  input  logic [ROW_W-1:0]  pb_row,
  input  line_t       pb_wdata,
  output line_t       pb_rdata,
  output int          fc_reads,
  output int          bm_programs
);
  localparam int MAXP = 64;

  function automatic logic [PPN_W-1:0] init_dppn(input longint d);
    return PPN_W'(d * 7 + 3);
  endfunction

  line_t pbuf [NSLOTS * TP_ROWS];
  line_t flash [longint];          // key: tppn * 64 + row
  int    next_tppn;

  function automatic line_t flash_row(input longint tppn, input int r);
    line_t l;
    if (flash.exists(tppn * TP_ROWS + r)) return flash[tppn * TP_ROWS + r];
    for (int e = 0; e < CMT_ENTRIES; e++)
      l[e*PPN_W +: PPN_W] = init_dppn(tppn * 1024 + longint'(r) * CMT_ENTRIES + e);
    return l;
  endfunction

  // pending flash reads
  typedef struct { int t; logic [PPN_W-1:0] tppn; logic [SLOT_W-1:0] slot; } fpend_t;
  fpend_t    fp    [$];
  // pending programs (in order)
  bm_resp_t  bq    [$];
  int        bq_t  [$];
  // completed reads waiting for the response queue
  fc_resp_t  fdone [$];

  int cyc;
  int rows_n;                      // row count held in a variable: loops stay loops

  assign fc_req_ready  = rst_n && (fp.size() < MAXP);
  assign bm_req_ready  = rst_n;
  assign fc_resp_valid = rst_n && (fdone.size() > 0);
  assign fc_resp       = (fdone.size() > 0) ? fdone[0] : '0;
  assign bm_resp_valid = rst_n && (bq.size() > 0) && (bq_t[0] <= cyc);
  assign bm_resp       = (bq.size() > 0) ? bq[0] : '0;

  task automatic copy_in(input logic [PPN_W-1:0] tppn, input logic [SLOT_W-1:0] slot);
    int r;
    r = 0;
    while (r < rows_n) begin
      pbuf[int'(slot) * TP_ROWS + r] = flash_row(longint'(tppn), r);
      r++;
    end
  endtask

  task automatic copy_out(input longint tppn, input logic [SLOT_W-1:0] slot);
    int r;
    r = 0;
    while (r < rows_n) begin
      flash[tppn * TP_ROWS + r] = pbuf[int'(slot) * TP_ROWS + r];
      r++;
    end
  endtask

  initial begin
    int i;
    cyc = 0;
    rows_n = TP_ROWS;
    fc_reads = 0;
    bm_programs = 0;
    next_tppn = NUM_TVPN;
    pb_rdata = '0;
    forever begin
      @(posedge clk);
      if (rst_n) begin
        if (fc_resp_valid && fc_resp_ready) void'(fdone.pop_front());
        if (bm_resp_valid && bm_resp_ready) begin
          void'(bq.pop_front());
          void'(bq_t.pop_front());
        end
        if (fc_req_valid && fc_req_ready) begin
          fp.push_back('{t: cyc + FC_MIN + int'($urandom_range(FC_MAX - FC_MIN)),
                         tppn: fc_req.tppn, slot: fc_req.slot});
          fc_reads++;
        end
        if (bm_req_valid && bm_req_ready) begin
          copy_out(longint'(next_tppn), bm_req.slot);
          bq.push_back('{tvpn: bm_req.tvpn, tppn: PPN_W'(next_tppn), slot: bm_req.slot});
          bq_t.push_back(cyc + BM_LAT);
          next_tppn++;
          bm_programs++;
        end
        // page-buffer port: read data appears after this edge
        if (pb_en && !pb_we) pb_rdata <= pbuf[int'(pb_slot) * TP_ROWS + int'(pb_row)];
        if (pb_en && pb_we)  pbuf[int'(pb_slot) * TP_ROWS + int'(pb_row)] = pb_wdata;
        // complete at most one due flash read per cycle
        i = 0;
        while (i < fp.size()) begin
          if (fp[i].t <= cyc) begin
            copy_in(fp[i].tppn, fp[i].slot);
            fdone.push_back('{slot: fp[i].slot});
            fp.delete(i);
            break;
          end
          i++;
        end
        cyc++;
      end
    end
  end

endmodule
