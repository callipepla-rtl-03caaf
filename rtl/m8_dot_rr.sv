// m8_dot_rr (M8): rr = r . r, line 15 of the JPCG loop.
//
// Runs in Phase-2 at the end of the r chain M4 -> M5 -> M6 -> M8: the r
// elements it consumes are the ones M6 forwards, so r is read from memory
// only once for the whole phase.  rr goes to the controller, which compares
// it with the threshold tau to decide whether to stop.  The sum uses the
// two-phase engine dot_acc with both operands taken from the r stream.
//
// Interface: inst_valid/inst_ready/inst (inst_cmp_t, only len is used);
// r_valid/r_ready/r_data FP64 stream; rr_valid/rr_ready/rr_data scalar out.
// Timing: len + ADD_LAT + 1 + (ADD_LAT+1)*L cycles for a gap-free stream.
//
// Lint note: only the length field of the instruction is used; the lint tool
// reports the alpha and q_id bits as unused, which is intended.
module m8_dot_rr
  import cg_pkg::*;
#(
  parameter int unsigned DOT_BUF = 8,
  parameter int unsigned ADD_LAT = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      inst_valid,
  output logic      inst_ready,
  input  inst_cmp_t inst,
  input  logic      r_valid,
  output logic      r_ready,
  input  fp64_t     r_data,
  output logic      rr_valid,
  input  logic      rr_ready,
  output fp64_t     rr_data
);
  logic busy;

  assign inst_ready = !busy;

  dot_acc #(.L(DOT_BUF), .ADD_LAT(ADD_LAT)) u_dot (
    .clk, .rst_n,
    .start(inst_valid && inst_ready), .len(inst.len), .busy,
    .in_valid(r_valid), .in_ready(r_ready), .in_a(r_data), .in_b(r_data),
    .res_valid(rr_valid), .res_ready(rr_ready), .res_data(rr_data));
endmodule
