// mem_rdwr: Rd/Wr memory module of a vector that is both read and written
// (ap, p, x and r), with the double off-chip channel scheme.
//
// A memory instruction (inst_rdwr_t {rd, wr, base_addr, len}) reads len
// elements, writes len elements, or does both at once.  With NCH=2 the
// module owns two HBM channels and a "current" pointer: a read-and-write
// instruction reads v_t from the current channel and writes v_t+1 to the
// other one, then swaps the pointer, so the next iteration reads v_t+1 where
// it was written.  Reads and writes of one instruction therefore never share
// a channel.  Read-only and write-only instructions use the current channel.
// With NCH=1 everything goes to channel 0.  After the last write of an
// instruction the module pulses resp (the memory response the controller
// uses to keep vector reads behind vector writes).  A write counts as done
// when the channel accepts it.
//
// Interface: inst_*; rd_* output stream (elements read); wr_* input stream
// (elements to write); per channel ch_req_*/ch_rsp_* read ports and
// ch_wr_valid/ready/addr/data write ports; cur_ch shows the current channel.
// Reads use the mem_rd engine; writes run at one element per cycle.
//
// The write data goes to both memory channels as a wire from the input; only
// the write-valid signals select the channel.
module mem_rdwr
  import cg_pkg::*;
#(
  parameter int unsigned NCH = 2,
  parameter int unsigned BUF = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inst_valid,
  output logic              inst_ready,
  input  inst_rdwr_t        inst,
  output logic              rd_valid,
  input  logic              rd_ready,
  output fp64_t             rd_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  fp64_t             wr_data,
  output logic [NCH-1:0]    ch_req_valid,
  input  logic [NCH-1:0]    ch_req_ready,
  output logic [31:0]       ch_req_addr [NCH],
  input  logic [NCH-1:0]    ch_rsp_valid,
  output logic [NCH-1:0]    ch_rsp_ready,
  input  fp64_t             ch_rsp_data [NCH],
  output logic [NCH-1:0]    ch_wr_valid,
  input  logic [NCH-1:0]    ch_wr_ready,
  output logic [31:0]       ch_wr_addr [NCH],
  output fp64_t             ch_wr_data [NCH],
  output logic              resp,
  output logic              cur_ch
);
  localparam int unsigned SW = (NCH > 1) ? $clog2(NCH) : 1;

  logic          busy, rsel, wsel, cur;
  logic          rd_inst_valid, rd_inst_ready, rd_active;
  logic          wr_active;
  logic [31:0]   wr_addr, wr_left;
  logic          req_valid, req_ready, rsp_valid, rsp_ready;
  logic [31:0]   req_addr;
  fp64_t         rsp_data;

  assign cur_ch     = cur;
  assign inst_ready = !busy && rd_inst_ready;
  wire   accept     = inst_valid && inst_ready;

  // read engine
  assign rd_inst_valid = accept && inst.rd;
  mem_rd #(.DW(64), .BUF(BUF)) u_rd (
    .clk, .rst_n,
    .inst_valid(rd_inst_valid), .inst_ready(rd_inst_ready), .inst,
    .req_valid, .req_ready, .req_addr,
    .rsp_valid, .rsp_ready, .rsp_data,
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data));

  // channel multiplexing
  always_comb begin
    req_ready = 1'b0;
    rsp_valid = 1'b0;
    rsp_data  = '0;
    for (int c = 0; c < NCH; c++) begin
      ch_req_valid[c] = req_valid && (SW'(c) == SW'(rsel));
      ch_req_addr[c]  = req_addr;
      ch_rsp_ready[c] = rsp_ready && (SW'(c) == SW'(rsel));
      ch_wr_valid[c]  = wr_active && (wr_left != 0) && wr_valid && (SW'(c) == SW'(wsel));
      ch_wr_addr[c]   = wr_addr;
      ch_wr_data[c]   = wr_data;
      if (SW'(c) == SW'(rsel)) begin
        req_ready = ch_req_ready[c];
        rsp_valid = ch_rsp_valid[c];
        rsp_data  = ch_rsp_data[c];
      end
    end
  end

  logic wsel_ready;
  always_comb begin
    wsel_ready = 1'b0;
    for (int c = 0; c < NCH; c++) if (SW'(c) == SW'(wsel)) wsel_ready = ch_wr_ready[c];
  end
  assign wr_ready = wr_active && (wr_left != 0) && wsel_ready;
  wire   wr_fire  = wr_valid && wr_ready;

  assign busy = rd_active || wr_active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur       <= 1'b0;
      rsel      <= 1'b0;
      wsel      <= 1'b0;
      rd_active <= 1'b0;
      wr_active <= 1'b0;
      wr_addr   <= '0;
      wr_left   <= '0;
      resp      <= 1'b0;
    end else begin
      resp <= 1'b0;
      if (accept) begin
        rsel      <= cur;
        wsel      <= (inst.rd && inst.wr && NCH > 1) ? ~cur : cur;
        if (inst.rd && inst.wr && NCH > 1) cur <= ~cur;
        rd_active <= inst.rd && (inst.len != 0);
        wr_active <= inst.wr;
        wr_addr   <= inst.base_addr;
        wr_left   <= inst.len;
      end else begin
        if (rd_active && rd_inst_ready) rd_active <= 1'b0;
        if (wr_fire) begin
          wr_addr <= wr_addr + 1;
          wr_left <= wr_left - 1;
        end
        if (wr_active && (wr_left == 0 || (wr_fire && wr_left == 1))) begin
          wr_active <= 1'b0;
          resp      <= 1'b1;
        end
      end
    end
  end
endmodule
