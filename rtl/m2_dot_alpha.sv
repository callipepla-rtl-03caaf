// m2_dot_alpha (M2): alpha = rz / (p . ap), line 8 of the JPCG loop.
//
// Runs in Phase-1.2.  p arrives from the p vector controller (memory) and ap
// straight from the SpMV engine M1, so ap is reused on chip instead of being
// read back from memory.  A pair is taken only when both streams have data.
// The dot product is the two-phase engine dot_acc (Phase I at one pair per
// cycle into a cyclic delay buffer, Phase II fold at II=ADD_LAT+1); the
// quotient rz/dot is formed combinationally on the result.  rz comes in the
// alpha field of the computation instruction (the controller holds all
// scalars).
//
// Interface: inst_valid/inst_ready/inst (inst_cmp_t: len, alpha=rz);
// p_* and ap_* valid/ready FP64 streams; alpha_valid/alpha_ready/alpha_data
// to the controller.  Timing: len + ADD_LAT + 1 + (ADD_LAT+1)*L cycles from
// the first pair to alpha_valid when both streams run without gaps.
//
// Lint note: the instruction's q_id field is not used by this module (it has
// one fixed destination); the lint tool reports those bits as unused.
module m2_dot_alpha
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
  input  logic      p_valid,
  output logic      p_ready,
  input  fp64_t     p_data,
  input  logic      ap_valid,
  output logic      ap_ready,
  input  fp64_t     ap_data,
  output logic      alpha_valid,
  input  logic      alpha_ready,
  output fp64_t     alpha_data
);
  logic  busy, in_ready;
  fp64_t rz, dot;

  assign inst_ready = !busy;
  assign p_ready    = in_ready && ap_valid;
  assign ap_ready   = in_ready && p_valid;
  assign alpha_data = fp64_pkg::fp64_div(rz, dot);

  always_ff @(posedge clk) begin
    if (!rst_n) rz <= '0;
    else if (inst_valid && inst_ready) rz <= inst.alpha;
  end

  dot_acc #(.L(DOT_BUF), .ADD_LAT(ADD_LAT)) u_dot (
    .clk, .rst_n,
    .start(inst_valid && inst_ready), .len(inst.len), .busy,
    .in_valid(p_valid && ap_valid), .in_ready, .in_a(p_data), .in_b(ap_data),
    .res_valid(alpha_valid), .res_ready(alpha_ready), .res_data(dot));
endmodule
