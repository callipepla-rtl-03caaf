// stream_fifo: valid/ready FIFO that joins every pair of modules.
//
// All modules of the accelerator talk through FIFOs.  Most are DEPTH=2; the
// stream that leaves the left-divide module on its fast (undelayed) side is
// made deeper (pipeline depth + 1) so the two outputs of that module cannot
// deadlock against each other.
//
// Interface: in_valid/in_ready/in_data, out_valid/out_ready/out_data; a word
// moves when valid and ready are both high on a rising clock edge.  in_ready
// is high whenever fewer than DEPTH words are stored; out_valid whenever one
// or more are.  No combinational path from input to output (a written word
// appears one cycle later).  count gives the occupancy.  Storage is a plain
// circular buffer; synchronous active-low reset empties it.
module stream_fifo #(
  parameter type         T     = logic [63:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  T                           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output T                           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                          mem [DEPTH];
  logic [AW-1:0]             wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign count     = cnt;

  function automatic logic [AW-1:0] bump(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_wr) begin
        mem[wp] <= in_data;
        wp      <= bump(wp);
      end
      if (do_rd) rp <= bump(rp);
      case ({do_wr, do_rd})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH)
    else $error("stream_fifo overflow");
endmodule
