// m3_update_x (M3): x = x + alpha * p, line 9 of the JPCG loop.
//
// Runs in Phase-3.  x is read from and written back to memory through the x
// vector controller (a read-and-write operation that the double-channel
// memory module serves from two HBM channels).  p is the p of the current
// iteration: in Phase-3 it is the old p that M7 forwards while computing the
// new one, so p is read from memory only once for M7 and M3 together.  For
// the single x update that closes a converged solve, M7 is not run and p
// comes from memory instead.  Bit 0 of the instruction's q_id selects the p
// source (1 = from M7, 0 = from memory); this encoding is this design's.
//
// Interface: inst (inst_cmp_t: len, alpha, q_id); p_m7_*, p_mem_*, x_* FP64
// input streams; out_* FP64 stream (new x) to the x vector controller.
// Timing: II=1, one register stage.
module m3_update_x
  import cg_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      inst_valid,
  output logic      inst_ready,
  input  inst_cmp_t inst,
  input  logic      p_m7_valid,
  output logic      p_m7_ready,
  input  fp64_t     p_m7_data,
  input  logic      p_mem_valid,
  output logic      p_mem_ready,
  input  fp64_t     p_mem_data,
  input  logic      x_valid,
  output logic      x_ready,
  input  fp64_t     x_data,
  output logic      out_valid,
  input  logic      out_ready,
  output fp64_t     out_data
);
  import fp64_pkg::fp64_add;
  import fp64_pkg::fp64_mul;

  logic        active, from_m7;
  logic [31:0] remaining;
  fp64_t       alpha;

  wire   p_valid = from_m7 ? p_m7_valid : p_mem_valid;
  fp64_t p_data;
  assign p_data = from_m7 ? p_m7_data : p_mem_data;

  wire take = active && (remaining != 0) && p_valid && x_valid && (!out_valid || out_ready);

  assign inst_ready  = !active;
  assign p_m7_ready  = take && from_m7;
  assign p_mem_ready = take && !from_m7;
  assign x_ready     = take;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active    <= 1'b0;
      from_m7   <= 1'b0;
      remaining <= '0;
      alpha     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (inst_valid && inst_ready) begin
        active    <= 1'b1;
        remaining <= inst.len;
        alpha     <= inst.alpha;
        from_m7   <= inst.q_id[0];
      end
      if (take) begin
        out_data  <= fp64_add(x_data, fp64_mul(alpha, p_data));
        out_valid <= 1'b1;
        remaining <= remaining - 1;
      end else if (out_ready) out_valid <= 1'b0;
      if (active && remaining == 0 && !out_valid) active <= 1'b0;
    end
  end
endmodule
