// tb_gtd: self-checking test of the Global Translation Directory. The whole
// directory is loaded through the power-up port, read back, then random
// updates (some in the same cycle as an init write, where the update must
// win) are mirrored in a reference array and checked by random reads.
module tb_gtd;
  import fmmu_pkg::*;
  localparam int NT = 4096;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [TVPN_W-1:0] rd_tvpn, upd_tvpn, init_tvpn;
  logic [PPN_W-1:0]  rd_tppn, upd_tppn, init_tppn;
  logic upd_we, init_we;
  gtd #(.NUM_TVPN(NT)) dut (.*);

  logic [PPN_W-1:0] refm [NT];

  initial begin
    upd_we = 0; init_we = 0; rd_tvpn = '0; upd_tvpn = '0; init_tvpn = '0; upd_tppn = '0; init_tppn = '0;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      init_we = 1; init_tvpn = TVPN_W'(t); init_tppn = PPN_W'(t * 3 + 1000); refm[t] = init_tppn;
    end
    @(negedge clk); init_we = 0;
    for (int t = 0; t < NT; t++) begin
      rd_tvpn = TVPN_W'(t); #1;
      checks++;
      if (rd_tppn != refm[t]) begin failures++; $display("FAIL init readback %0d", t); end
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      upd_we = $urandom_range(1); upd_tvpn = TVPN_W'($urandom_range(NT-1)); upd_tppn = $urandom();
      init_we = $urandom_range(3) == 0; init_tvpn = ($urandom_range(1) != 0) ? upd_tvpn : TVPN_W'($urandom_range(NT-1));
      init_tppn = $urandom();
      @(posedge clk); #1;
      if (upd_we) refm[upd_tvpn] = upd_tppn;
      else if (init_we) refm[init_tvpn] = init_tppn;
      upd_we = 0; init_we = 0;
      rd_tvpn = ($urandom_range(1) != 0) ? upd_tvpn : TVPN_W'($urandom_range(NT-1)); #1;
      checks++;
      if (rd_tppn != refm[rd_tvpn]) begin failures++; $display("FAIL read %0d", rd_tvpn); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
