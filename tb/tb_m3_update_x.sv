// tb_m3_update_x: self-checking testbench of M3 (x' = x + alpha * p).
//
// Two instructions of LEN elements: the first with q_id bit 0 set, so p must
// be taken from the M7 forwarding stream, the second with it clear, so p must
// come from the memory stream.  Each p source only holds the words of its own
// instruction, so a module that picked the wrong source stalls and the
// watchdog fails the test.  Sources have random gaps, the sink random
// back-pressure; expected values use `real` arithmetic.
module tb_m3_update_x;
  import cg_pkg::*;
  localparam int LEN = 120;
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

  function automatic real rnd();
    return (real'($urandom % 4000) - 2000.0) / 29.0;
  endfunction

  logic iv = 1'b0, ir;  inst_cmp_t inst = '0;
  logic pv, pr, mv, mr, xv, xr, ov, orr;
  fp64_t pd, md, xd, od;
  tb_src  #(.W(64)) u_pm7 (.clk, .rst_n, .valid(pv), .ready(pr), .data(pd));
  tb_src  #(.W(64)) u_pmem(.clk, .rst_n, .valid(mv), .ready(mr), .data(md));
  tb_src  #(.W(64)) u_x   (.clk, .rst_n, .valid(xv), .ready(xr), .data(xd));
  tb_sink #(.W(64), .NAME("x")) u_out (.clk, .rst_n, .valid(ov), .ready(orr), .data(od));
  m3_update_x u_dut (.clk, .rst_n, .inst_valid(iv), .inst_ready(ir), .inst,
    .p_m7_valid(pv), .p_m7_ready(pr), .p_m7_data(pd),
    .p_mem_valid(mv), .p_mem_ready(mr), .p_mem_data(md),
    .x_valid(xv), .x_ready(xr), .x_data(xd),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  task automatic issue(real alpha, bit from_m7);
    inst = '{len: 32'(LEN), alpha: $realtobits(alpha), q_id: {2'b00, from_m7}};
    for (int i = 0; i < LEN; i++) begin
      real p, x;
      p = rnd(); x = rnd();
      if (from_m7) u_pm7.push($realtobits(p));
      else         u_pmem.push($realtobits(p));
      u_x.push($realtobits(x));
      u_out.expect_word($realtobits(x + alpha * p));
    end
    @(negedge clk);
    iv = 1'b1;
    while (!ir) @(negedge clk);
    @(negedge clk);
    iv = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    issue(0.3125, 1'b1);
    while (u_out.got < LEN) @(negedge clk);
    issue(-17.0, 1'b0);
    while (u_out.got < 2 * LEN) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += u_out.got;
    failures += u_out.errors;
    checks++;
    if (u_pm7.sent != LEN || u_pmem.sent != LEN) begin
      failures++;
      $display("FAIL: p taken %0d from M7 and %0d from memory", u_pm7.sent, u_pmem.sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
