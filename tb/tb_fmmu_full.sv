// tb_fmmu_full: end-to-end test of fmmu_top at its default (full) size:
// CMT of 256 sets x 4 ways (64 KB), CTP of 64 sets x 4 ways (1 MB), 4096
// translation pages. The traffic spreads over 400 translation pages
// (1.6 GB of the 16 GB logical space), more than the CTP holds, so CTP
// evictions, flash reads, programs and GTD updates take place; whether the
// CMT's flush mode is reached depends on the mix, so missing mechanisms are
// reported but not counted as failures. See tb_fmmu_env for the checks.
module tb_fmmu_full;
  tb_fmmu_env #(.FULL(1'b1), .N_OPS(30000), .N_TP(400), .REQUIRE_ALL(1'b0),
                .WATCHDOG(20_000_000)) u_env ();
endmodule
