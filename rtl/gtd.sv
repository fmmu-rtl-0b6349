// gtd: Global Translation Directory.
//
// Holds, for every translation page, where it currently lives in flash: one
// TPPN (translation physical page number) per TVPN (translation virtual page
// number). The CTP reads it when it misses and must fetch a translation page,
// and writes it when the block manager reports that a flushed translation
// page has been programmed to a new place.
//
// At power-up the whole directory is filled from flash through the init
// port (init_we/init_tvpn/init_tppn); this design leaves that load to the
// firmware or boot logic that drives the port. Reads are combinational
// (rd_tvpn -> rd_tppn in the same cycle). Writes take effect at the next clock
// edge; when both write ports are used in one cycle the update port wins.
//
// That the GTD keeps every TVPN-to-TPPN entry in RAM is the paper's; the
// ports and their timing are this design's.
module gtd
  import fmmu_pkg::*;
#(
  parameter int NUM_TVPN = 4096    // 16 GB / 4 KB pages / 1024 entries per page
) (
  input  logic                  clk,
  input  logic [TVPN_W-1:0]     rd_tvpn,
  output logic [PPN_W-1:0]      rd_tppn,
  input  logic                  upd_we,
  input  logic [TVPN_W-1:0]     upd_tvpn,
  input  logic [PPN_W-1:0]      upd_tppn,
  input  logic                  init_we,
  input  logic [TVPN_W-1:0]     init_tvpn,
  input  logic [PPN_W-1:0]      init_tppn
);
  localparam int AW = $clog2(NUM_TVPN);

  logic [PPN_W-1:0] dir [NUM_TVPN];

  assign rd_tppn = dir[rd_tvpn[AW-1:0]];

  always_ff @(posedge clk) begin
    if (upd_we)       dir[upd_tvpn[AW-1:0]]  <= upd_tppn;
    else if (init_we) dir[init_tvpn[AW-1:0]] <= init_tppn;
  end

endmodule
