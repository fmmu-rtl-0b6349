// tb_fmmu_top: end-to-end test of the FMMU at reduced cache sizes (CMT of
// 8 sets x 4 ways, CTP of 2 sets x 4 ways) so that evictions, both levels of
// flushing, blocked requests and merged misses all happen within a few
// thousand requests. See tb_fmmu_env for the phases and checks.
module tb_fmmu_top;
  tb_fmmu_env #(.FULL(1'b0), .CMT_SETS(8), .CMT_WAYS(4), .CTP_SETS(2), .CTP_WAYS(4),
                .N_OPS(4000), .N_TP(12), .REQUIRE_ALL(1'b1)) u_env ();
endmodule
