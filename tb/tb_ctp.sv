// tb_ctp: test of the CTP under pressure. The CTP is cut to 1 set x 4 ways
// (4 pages) against 10 translation pages in use, so that nearly every CMT
// request misses in the CTP, pages are evicted, merged misses fill the
// in-page MSHRs, and dirty pages are programmed through the BM with GTD
// updates. tb_fmmu_env checks every response against a golden map, the
// latencies, and that each mechanism happened.
module tb_ctp;
  tb_fmmu_env #(.FULL(1'b0), .CMT_SETS(8), .CMT_WAYS(4), .CTP_SETS(1), .CTP_WAYS(4),
                .N_OPS(3000), .N_TP(8), .REQUIRE_ALL(1'b1)) u_env ();
endmodule
