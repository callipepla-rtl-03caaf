// m6_dot_rz (M6): rz = r . z, line 12 of the JPCG loop.
//
// Runs in Phase-2.  z and r both come from the left-divide module M5; each r
// element is passed on to M8 in the same cycle it is consumed (on-chip reuse
// of r), so a pair is taken only when r, z and the downstream r FIFO are all
// ready.  rz goes to the controller (used by M2 as the numerator of alpha and
// by the controller for beta = rz_new / rz_old).
//
// Interface: inst_valid/inst_ready/inst (inst_cmp_t, only len is used);
// r_* and z_* FP64 input streams; r_m8_* FP64 output stream; rz_* scalar out.
// Timing: as dot_acc, len + ADD_LAT + 1 + (ADD_LAT+1)*L cycles.
//
// Lint note: only the length field of the instruction is used; the lint tool
// reports the alpha and q_id bits as unused, which is intended.
//
// r is forwarded unchanged to M8 (r_m8_data is a wire from the r input).
module m6_dot_rz
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
  input  logic      z_valid,
  output logic      z_ready,
  input  fp64_t     z_data,
  output logic      r_m8_valid,
  input  logic      r_m8_ready,
  output fp64_t     r_m8_data,
  output logic      rz_valid,
  input  logic      rz_ready,
  output fp64_t     rz_data
);
  logic busy, in_ready;

  wire  take = in_ready && r_valid && z_valid && r_m8_ready;

  assign inst_ready = !busy;
  assign r_ready    = take;
  assign z_ready    = take;
  assign r_m8_valid = take;
  assign r_m8_data  = r_data;

  dot_acc #(.L(DOT_BUF), .ADD_LAT(ADD_LAT)) u_dot (
    .clk, .rst_n,
    .start(inst_valid && inst_ready), .len(inst.len), .busy,
    .in_valid(r_valid && z_valid && r_m8_ready), .in_ready, .in_a(r_data), .in_b(z_data),
    .res_valid(rz_valid), .res_ready(rz_ready), .res_data(rz_data));
endmodule
