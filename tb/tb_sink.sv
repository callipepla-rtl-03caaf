// tb_sink: testbench stream sink.  ready is high except in about one cycle of
// three when RAND is set (pseudo-random back-pressure).  Every word received
// is compared with the next word queued with expect_word(); mismatches and
// words that arrive with nothing expected count as errors.  got counts the
// words received, last_cyc the cycle of the latest one.
module tb_sink #(
  parameter int unsigned W    = 64,
  parameter bit          RAND = 1'b1,
  parameter string       NAME = "sink"
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  output logic         ready,
  input  logic [W-1:0] data
);
  logic [W-1:0] q [$];
  logic         hold = 1'b0;
  int           got = 0;
  int           errors = 0;
  longint       cyc = 0;
  longint       last_cyc = 0;

  task automatic expect_word(input logic [W-1:0] v);
    q.push_back(v);
  endtask

  assign ready = !hold;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && valid && ready) begin
      got      <= got + 1;
      last_cyc <= cyc;
      if (q.size() == 0) begin
        errors <= errors + 1;
        $display("%s: unexpected word %h", NAME, data);
      end else begin
        if (data != q[0]) begin
          errors <= errors + 1;
          if (errors < 5) $display("%s: got %h expected %h", NAME, data, q[0]);
        end
        void'(q.pop_front());
      end
    end
    hold <= RAND && ($urandom % 3 == 0);
  end
endmodule
