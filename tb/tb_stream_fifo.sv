// tb_stream_fifo: self-checking testbench of the inter-module FIFO.
//
// Depths 2 (the ordinary FIFO) and 34 (the deadlock-avoidance FIFO) are
// tested with a random-gap source and a random back-pressure sink: every
// word must come out once, in order.  Then, with the sink stopped, each FIFO
// must accept exactly DEPTH words, report count = DEPTH and drop in_ready,
// then deliver the held words first once the sink restarts.
module tb_stream_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic sv2, sr2, fv2, fr2, sv34, sr34, fv34, fr34;
  logic [63:0] sd2, fd2, sd34, fd34;
  logic [1:0] cnt2;
  logic [5:0] cnt34;
  logic stop = 1'b0;
  tb_src  #(.W(64)) u_s2  (.clk, .rst_n, .valid(sv2), .ready(sr2), .data(sd2));
  tb_src  #(.W(64)) u_s34 (.clk, .rst_n, .valid(sv34), .ready(sr34), .data(sd34));
  tb_sink #(.W(64), .NAME("fifo2"))  u_k2  (.clk, .rst_n, .valid(fv2 && !stop), .ready(fr2), .data(fd2));
  tb_sink #(.W(64), .NAME("fifo34")) u_k34 (.clk, .rst_n, .valid(fv34 && !stop), .ready(fr34), .data(fd34));
  stream_fifo #(.T(logic [63:0]), .DEPTH(2)) u_f2 (.clk, .rst_n,
    .in_valid(sv2), .in_ready(sr2), .in_data(sd2),
    .out_valid(fv2), .out_ready(fr2 && !stop), .out_data(fd2), .count(cnt2));
  stream_fifo #(.T(logic [63:0]), .DEPTH(34)) u_f34 (.clk, .rst_n,
    .in_valid(sv34), .in_ready(sr34), .in_data(sd34),
    .out_valid(fv34), .out_ready(fr34 && !stop), .out_data(fd34), .count(cnt34));

  initial begin
    logic [63:0] w;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      w = {$urandom, $urandom};
      u_s2.push(w);  u_k2.expect_word(w);
      u_s34.push(w); u_k34.expect_word(w);
    end
    while (u_k2.got < 500 || u_k34.got < 500) @(negedge clk);
    // fill with the output stopped
    stop = 1'b1;
    for (int i = 0; i < 40; i++) begin
      w = {32'hF1F0, 32'(i)};
      u_s2.push(w);
      u_s34.push(w);
    end
    repeat (200) @(negedge clk);
    checks += 4;
    if (u_s2.sent != 502)  begin failures++; $display("FAIL: depth-2 FIFO took %0d words", u_s2.sent - 500); end
    if (u_s34.sent != 534) begin failures++; $display("FAIL: depth-34 FIFO took %0d words", u_s34.sent - 500); end
    if (cnt2 != 2'd2 || sr2)    begin failures++; $display("FAIL: depth-2 FIFO count %0d ready %0b", cnt2, sr2); end
    if (cnt34 != 6'd34 || sr34) begin failures++; $display("FAIL: depth-34 FIFO count %0d ready %0b", cnt34, sr34); end
    for (int i = 0; i < 2; i++)  u_k2.expect_word({32'hF1F0, 32'(i)});
    for (int i = 0; i < 34; i++) u_k34.expect_word({32'hF1F0, 32'(i)});
    for (int i = 2; i < 40; i++)  u_k2.expect_word({32'hF1F0, 32'(i)});
    for (int i = 34; i < 40; i++) u_k34.expect_word({32'hF1F0, 32'(i)});
    stop = 1'b0;
    while (u_k2.got < 540 || u_k34.got < 540) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += u_k2.got + u_k34.got;
    failures += u_k2.errors + u_k34.errors;
    checks++;
    if (cnt2 != 0 || fv2) begin failures++; $display("FAIL: FIFO not empty at the end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
