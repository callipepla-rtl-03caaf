// tb_src: testbench stream source.  Words queued with push() are offered on
// valid/data in order; when RAND is set, valid is withheld in about one cycle
// of four (pseudo-random) to exercise the receiver's handling of gaps.
// sent counts the words accepted by the receiver (and indexes the next).
module tb_src #(
  parameter int unsigned W    = 64,
  parameter bit          RAND = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic         valid,
  input  logic         ready,
  output logic [W-1:0] data
);
  logic [W-1:0] q [$];
  logic         gap = 1'b0;
  int           sent = 0;

  task automatic push(input logic [W-1:0] v);
    q.push_back(v);
  endtask

  // the read index moves with a non-blocking update, so a receiver sampling
  // data on the same edge always sees the word it accepted
  assign valid = (sent < q.size()) && !gap;
  assign data  = (sent < q.size()) ? q[sent] : '0;

  always @(posedge clk) begin
    if (rst_n && valid && ready) sent <= sent + 1;
    gap <= RAND && ($urandom % 4 == 0);
  end
endmodule
