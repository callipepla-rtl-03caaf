// mem_rd: read-only memory module (RdA0..RdA15 for the sparse matrix, Rd M
// for the Jacobi diagonal, and the read side of every Rd/Wr module).
//
// It executes the read part of a memory instruction (Type-III, inst_rdwr_t):
// len consecutive words from base_addr of one HBM channel are requested in
// order and streamed out on out_*.  Requests run ahead of the consumer
// (prefetch) but never beyond the space of the BUF-entry response buffer, so
// a stalled consumer can never lose data.  To stream one word per cycle the
// buffer must cover the memory's round-trip latency, hence BUF = 64 (this
// design's choice; the paper gives no latency figures).
//
// Memory channel (this design's choice, one per HBM pseudo-channel):
//   req_valid/req_ready/req_addr   word-address read request
//   rsp_valid/rsp_ready/rsp_data   read data, in request order
// Interface to the module side: inst_valid/inst_ready/inst (only base_addr
// and len are used); out_valid/out_ready/out_data.  Throughput one word per
// cycle after the memory latency; inst_ready returns high once the last word
// of the previous instruction has been delivered.
//
// Lint note: a read-only channel ignores the instruction's rd and wr flags
// (it always reads base_addr..base_addr+len-1); the lint tool reports those
// two bits as unused, which is intended.
module mem_rd
  import cg_pkg::*;
#(
  parameter int unsigned DW  = 64,
  parameter int unsigned BUF = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          inst_valid,
  output logic          inst_ready,
  input  inst_rdwr_t    inst,
  output logic          req_valid,
  input  logic          req_ready,
  output logic [31:0]   req_addr,
  input  logic          rsp_valid,
  output logic          rsp_ready,
  input  logic [DW-1:0] rsp_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  localparam int unsigned CW = $clog2(BUF + 1);

  logic          active;
  logic [31:0]   addr, to_issue, to_deliver;
  logic [CW:0]   pending;
  logic [CW-1:0] fcount;
  logic          f_in_ready;

  assign inst_ready = !active;
  assign req_valid  = active && (to_issue != 0) && ((CW+1)'(pending) + (CW+1)'(fcount) < (CW+1)'(BUF));
  assign req_addr   = addr;
  assign rsp_ready  = f_in_ready;

  wire issue   = req_valid && req_ready;
  wire arrive  = rsp_valid && rsp_ready;
  wire deliver = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active     <= 1'b0;
      addr       <= '0;
      to_issue   <= '0;
      to_deliver <= '0;
      pending    <= '0;
    end else begin
      if (inst_valid && inst_ready) begin
        active     <= inst.len != 0;
        addr       <= inst.base_addr;
        to_issue   <= inst.len;
        to_deliver <= inst.len;
      end
      if (issue) begin
        addr     <= addr + 1;
        to_issue <= to_issue - 1;
      end
      case ({issue, arrive})
        2'b10:   pending <= pending + 1'b1;
        2'b01:   pending <= pending - 1'b1;
        default: pending <= pending;
      endcase
      if (deliver) begin
        to_deliver <= to_deliver - 1;
        if (to_deliver == 1) active <= 1'b0;
      end
    end
  end

  stream_fifo #(.T(logic [DW-1:0]), .DEPTH(BUF)) u_buf (
    .clk, .rst_n,
    .in_valid(rsp_valid), .in_ready(f_in_ready), .in_data(rsp_data),
    .out_valid, .out_ready, .out_data, .count(fcount));
endmodule
