// m4_update_r (M4): r = r - alpha * ap, line 10 of the JPCG loop.
//
// Runs in Phase-2 and again in Phase-3 (recomputation: the updated r is not
// stored in Phase-2, so Phase-3 recomputes it to feed M5, which then
// regenerates z for M7 without a z vector in memory).  r and ap are read from
// memory; the new r goes straight to M5.  alpha arrives in the computation
// instruction.
//
// Interface: inst_valid/inst_ready/inst (inst_cmp_t: len, alpha);
// r_*, ap_* FP64 input streams; out_* FP64 stream to M5.  Timing: one
// element per cycle (II=1), one register stage of latency; an instruction
// finishes when len results have left the output register.
//
// Lint note: the instruction's q_id field is not used by this module (it has
// one fixed destination); the lint tool reports those bits as unused.
module m4_update_r
  import cg_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      inst_valid,
  output logic      inst_ready,
  input  inst_cmp_t inst,
  input  logic      r_valid,
  output logic      r_ready,
  input  fp64_t     r_data,
  input  logic      ap_valid,
  output logic      ap_ready,
  input  fp64_t     ap_data,
  output logic      out_valid,
  input  logic      out_ready,
  output fp64_t     out_data
);
  import fp64_pkg::fp64_sub;
  import fp64_pkg::fp64_mul;

  logic        active;
  logic [31:0] remaining;
  fp64_t       alpha;

  wire take = active && (remaining != 0) && r_valid && ap_valid && (!out_valid || out_ready);

  assign inst_ready = !active;
  assign r_ready    = take;
  assign ap_ready   = take;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active    <= 1'b0;
      remaining <= '0;
      alpha     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (inst_valid && inst_ready) begin
        active    <= 1'b1;
        remaining <= inst.len;
        alpha     <= inst.alpha;
      end
      if (take) begin
        out_data  <= fp64_sub(r_data, fp64_mul(alpha, ap_data));
        out_valid <= 1'b1;
        remaining <= remaining - 1;
      end else if (out_ready) out_valid <= 1'b0;
      if (active && remaining == 0 && !out_valid) active <= 1'b0;
    end
  end
endmodule
