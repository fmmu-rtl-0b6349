// tb_cmt: test of the CMT under pressure. The CMT is cut to 2 sets x 4 ways
// (8 blocks) so that whole sets fill with dirty blocks: this forces the
// per-set flush of a translation page, the watermark flush mode, blocked
// requests and merged misses on every few requests. The CTP, FC and BM
// around it are the real CTP and the behavioural models of tb_fmmu_env,
// which checks every response against a golden map, the CMT-hit and
// CMT-miss/CTP-hit latencies, and that each mechanism happened.
module tb_cmt;
  tb_fmmu_env #(.FULL(1'b0), .CMT_SETS(2), .CMT_WAYS(4), .CTP_SETS(2), .CTP_WAYS(4),
                .N_OPS(3000), .N_TP(8), .REQUIRE_ALL(1'b1)) u_env ();
endmodule
