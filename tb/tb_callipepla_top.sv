// tb_callipepla_top: end-to-end test of the solver at reduced size.
//
// Two matrix channels of two PEs each (4 PEs), X memory of 8 columns and Y
// memory of 16 rows, so that a 20-row problem needs three column segments
// per SpMV and five rows per PE.  The pipeline depths, FIFO depths and
// dot-product sizes stay at their defaults, so the deadlock-avoidance FIFO
// and the double-channel scheme are exercised exactly as in the full design.
// HBM channels refuse 10 % of requests at random.  All checking is done by
// cg_bench (reference JPCG, solution, iteration count, mechanism counts).
module tb_callipepla_top;
  cg_bench #(
    .FULL(1'b0), .N_CH_A(2), .PE_PER_CH(2), .XMEM_DEPTH(8), .YMEM_DEPTH(16),
    .N(20), .D1(3), .D2(9), .ADEPTH(128), .VDEPTH(32), .STALL_PCT(10),
    .ITE_MAX1(2), .ITE_MAX2(200), .WATCHDOG(400000)
  ) u_bench ();
endmodule
