// m7_update_p (M7): p = z + beta * p with beta = rz_new / rz_old, line 13.
//
// Runs in Phase-3.  z comes from M5 (recomputed in this phase, never stored),
// the old p from memory.  The new p is written back to memory; when bit 0 of
// the instruction's q_id is set the consumed old p is also duplicated to M3,
// which needs exactly that p for x = x + alpha * p.  beta is computed by the
// controller and carried in the alpha field of the instruction.
//
// Interface: inst (inst_cmp_t: len, alpha=beta, q_id); p_*, z_* FP64 input
// streams; out_* (new p, to memory) and pold_* (old p, to M3) FP64 output
// streams.  Timing: II=1, one register stage; an element is taken only when
// every enabled output register is free.
module m7_update_p
  import cg_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      inst_valid,
  output logic      inst_ready,
  input  inst_cmp_t inst,
  input  logic      p_valid,
  output logic      p_ready,
  input  fp64_t     p_data,
  input  logic      z_valid,
  output logic      z_ready,
  input  fp64_t     z_data,
  output logic      out_valid,
  input  logic      out_ready,
  output fp64_t     out_data,
  output logic      pold_valid,
  input  logic      pold_ready,
  output fp64_t     pold_data
);
  import fp64_pkg::fp64_add;
  import fp64_pkg::fp64_mul;

  logic        active, fwd;
  logic [31:0] remaining;
  fp64_t       beta;

  wire out_free  = !out_valid || out_ready;
  wire pold_free = !pold_valid || pold_ready;
  wire take = active && (remaining != 0) && p_valid && z_valid && out_free && (pold_free || !fwd);

  assign inst_ready = !active;
  assign p_ready    = take;
  assign z_ready    = take;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active     <= 1'b0;
      fwd        <= 1'b0;
      remaining  <= '0;
      beta       <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      pold_valid <= 1'b0;
      pold_data  <= '0;
    end else begin
      if (inst_valid && inst_ready) begin
        active    <= 1'b1;
        remaining <= inst.len;
        beta      <= inst.alpha;
        fwd       <= inst.q_id[0];
      end
      if (take) begin
        out_data  <= fp64_add(z_data, fp64_mul(beta, p_data));
        out_valid <= 1'b1;
        remaining <= remaining - 1;
      end else if (out_ready) out_valid <= 1'b0;
      if (take && fwd) begin
        pold_data  <= p_data;
        pold_valid <= 1'b1;
      end else if (pold_ready) pold_valid <= 1'b0;
      if (active && remaining == 0 && !out_valid && !pold_valid) active <= 1'b0;
    end
  end
endmodule
