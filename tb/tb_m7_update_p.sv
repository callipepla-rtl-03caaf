// tb_m7_update_p: self-checking testbench of M7 (p' = z + beta * p).
//
// Two instructions of LEN elements: with q_id bit 0 set the consumed old p
// must also appear, unchanged and in order, on the forwarding output to M3;
// with it clear nothing may appear there.  beta travels in the alpha field.
// Sources have random gaps and both sinks random back-pressure; expected
// values use `real` arithmetic.
module tb_m7_update_p;
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
    return (real'($urandom % 4000) - 2000.0) / 23.0;
  endfunction

  logic iv = 1'b0, ir;  inst_cmp_t inst = '0;
  logic pv, pr, zv, zr, ov, orr, fv, fr;
  fp64_t pd, zd, od, fd;
  tb_src  #(.W(64)) u_p (.clk, .rst_n, .valid(pv), .ready(pr), .data(pd));
  tb_src  #(.W(64)) u_z (.clk, .rst_n, .valid(zv), .ready(zr), .data(zd));
  tb_sink #(.W(64), .NAME("p_new")) u_out  (.clk, .rst_n, .valid(ov), .ready(orr), .data(od));
  tb_sink #(.W(64), .NAME("p_old")) u_pold (.clk, .rst_n, .valid(fv), .ready(fr), .data(fd));
  m7_update_p u_dut (.clk, .rst_n, .inst_valid(iv), .inst_ready(ir), .inst,
    .p_valid(pv), .p_ready(pr), .p_data(pd), .z_valid(zv), .z_ready(zr), .z_data(zd),
    .out_valid(ov), .out_ready(orr), .out_data(od),
    .pold_valid(fv), .pold_ready(fr), .pold_data(fd));

  task automatic issue(real beta, bit fwd);
    inst = '{len: 32'(LEN), alpha: $realtobits(beta), q_id: {2'b00, fwd}};
    for (int i = 0; i < LEN; i++) begin
      real p, z;
      p = rnd(); z = rnd();
      u_p.push($realtobits(p));
      u_z.push($realtobits(z));
      u_out.expect_word($realtobits(z + beta * p));
      if (fwd) u_pold.expect_word($realtobits(p));
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
    issue(0.859375, 1'b1);
    while (u_out.got < LEN || u_pold.got < LEN) @(negedge clk);
    issue(2.5e-4, 1'b0);
    while (u_out.got < 2 * LEN) @(negedge clk);
    repeat (20) @(negedge clk);
    checks += u_out.got + u_pold.got;
    failures += u_out.errors + u_pold.errors;
    checks++;
    if (u_pold.got != LEN) begin
      failures++;
      $display("FAIL: %0d old-p words forwarded, expected %0d", u_pold.got, LEN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
