// tb_callipepla_full: one complete solve with callipepla_top at its default
// parameters (16 matrix channels x 8 PEs, 4096-column X memories,
// 24576-row Y memories, M5 latency 33, FIFO depths 2 and 34).
//
// The problem has 5000 rows, so every SpMV runs two column segments and each
// PE owns up to 40 rows; 5 % of HBM requests are refused at random.  As in
// the reduced test, cg_bench runs a solve stopped by the iteration limit and
// one stopped by the tolerance 1e-12 and checks both against a reference.
module tb_callipepla_full;
  cg_bench #(
    .FULL(1'b1), .N(5000), .D1(3), .D2(2500), .ADEPTH(512), .VDEPTH(8192),
    .STALL_PCT(5), .ITE_MAX1(1), .ITE_MAX2(200), .WATCHDOG(3000000)
  ) u_bench ();
endmodule
