// vec_ctrl: vector control module (VecCtrl ap, p, x, r and M).
//
// It owns the traffic of one vector between its memory module and the
// computation modules.  For each vector control instruction (Type-I,
// inst_vctrl_t {rd, wr, base_addr, len, q_id}) it
//   1. passes a memory instruction {rd, wr, base_addr, len} to its memory
//      module (Type-III),
//   2. if rd, routes the len elements that come back to destination q_id,
//   3. if wr, forwards len elements from the vector's producer to memory.
// Reads and writes of one instruction proceed concurrently.  The next
// instruction starts when both counts of the current one are done, so
// instructions queued ahead (prefetch) execute in issue order.  Which module
// a q_id value names is fixed by the wiring of the top level (see cg_pkg).
//
// Interface: inst_*; mem_inst_* to the memory module; mem_rd_* read stream
// from it and mem_wr_* write stream to it; dst_*[NDEST] output streams;
// src_* input stream of the producer of this vector.  Routing is
// combinational (no added latency).
//
// Data is not modified here: dst_data is the memory read data and
// mem_wr_data the source data, steered only by the valid/ready logic.
module vec_ctrl
  import cg_pkg::*;
#(
  parameter int unsigned NDEST = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inst_valid,
  output logic             inst_ready,
  input  inst_vctrl_t      inst,
  output logic             mem_inst_valid,
  input  logic             mem_inst_ready,
  output inst_rdwr_t       mem_inst,
  input  logic             mem_rd_valid,
  output logic             mem_rd_ready,
  input  fp64_t            mem_rd_data,
  output logic             mem_wr_valid,
  input  logic             mem_wr_ready,
  output fp64_t            mem_wr_data,
  output logic [NDEST-1:0] dst_valid,
  input  logic [NDEST-1:0] dst_ready,
  output fp64_t            dst_data,
  input  logic             src_valid,
  output logic             src_ready,
  input  fp64_t            src_data
);
  logic        active;
  logic [2:0]  qid;
  logic [31:0] rd_left, wr_left;

  assign inst_ready = !active;

  // read routing
  logic sel_ready;
  always_comb begin
    sel_ready = 1'b0;
    for (int d = 0; d < NDEST; d++) begin
      dst_valid[d] = active && (rd_left != 0) && mem_rd_valid && (3'(d) == qid);
      if (3'(d) == qid) sel_ready = dst_ready[d];
    end
  end
  assign dst_data     = mem_rd_data;
  assign mem_rd_ready = active && (rd_left != 0) && sel_ready;

  // write forwarding
  assign mem_wr_valid = active && (wr_left != 0) && src_valid;
  assign mem_wr_data  = src_data;
  assign src_ready    = active && (wr_left != 0) && mem_wr_ready;

  wire rd_fire = mem_rd_valid && mem_rd_ready;
  wire wr_fire = mem_wr_valid && mem_wr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active         <= 1'b0;
      qid            <= '0;
      rd_left        <= '0;
      wr_left        <= '0;
      mem_inst_valid <= 1'b0;
      mem_inst       <= '0;
    end else begin
      if (mem_inst_valid && mem_inst_ready) mem_inst_valid <= 1'b0;
      if (inst_valid && inst_ready) begin
        active         <= 1'b1;
        qid            <= inst.q_id;
        rd_left        <= inst.rd ? inst.len : 32'd0;
        wr_left        <= inst.wr ? inst.len : 32'd0;
        mem_inst_valid <= 1'b1;
        mem_inst       <= '{rd: inst.rd, wr: inst.wr, base_addr: inst.base_addr, len: inst.len};
      end else if (active) begin
        if (rd_fire) rd_left <= rd_left - 1;
        if (wr_fire) wr_left <= wr_left - 1;
        if (!mem_inst_valid && (rd_left == 0 || (rd_fire && rd_left == 1))
                            && (wr_left == 0 || (wr_fire && wr_left == 1)))
          active <= 1'b0;
      end
    end
  end
endmodule
