// tb_m4_update_r: self-checking testbench of M4 (r' = r - alpha * ap).
//
// Two instances: one fed by sources with random gaps and drained by a sink
// with random back-pressure (two instructions of LEN elements, different
// alpha), and one with free-flowing streams, on which the rate is checked:
// the paper's modules stream one element per cycle, so LEN results must
// leave in LEN consecutive cycles.  Expected values are computed with the
// simulator's double-precision `real` arithmetic.
module tb_m4_update_r;
  import cg_pkg::*;
  localparam int LEN = 150;
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
    return (real'($urandom % 4000) - 2000.0) / 37.0;
  endfunction

  // instance A: random traffic
  logic iv = 1'b0, ir;  inst_cmp_t inst = '0;
  logic rv, rr, av, ar, ov, orr;
  fp64_t rd, ad, od;
  tb_src  #(.W(64)) u_r  (.clk, .rst_n, .valid(rv), .ready(rr), .data(rd));
  tb_src  #(.W(64)) u_ap (.clk, .rst_n, .valid(av), .ready(ar), .data(ad));
  tb_sink #(.W(64), .NAME("out")) u_out (.clk, .rst_n, .valid(ov), .ready(orr), .data(od));
  m4_update_r u_dut (.clk, .rst_n, .inst_valid(iv), .inst_ready(ir), .inst,
    .r_valid(rv), .r_ready(rr), .r_data(rd), .ap_valid(av), .ap_ready(ar), .ap_data(ad),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  // instance B: free-flowing, for the rate
  logic iv2 = 1'b0, ir2;
  logic rv2, rr2, av2, ar2, ov2, orr2;
  fp64_t rd2, ad2, od2;
  tb_src  #(.W(64), .RAND(1'b0)) u_r2  (.clk, .rst_n, .valid(rv2), .ready(rr2), .data(rd2));
  tb_src  #(.W(64), .RAND(1'b0)) u_ap2 (.clk, .rst_n, .valid(av2), .ready(ar2), .data(ad2));
  tb_sink #(.W(64), .RAND(1'b0), .NAME("out2")) u_out2 (.clk, .rst_n, .valid(ov2), .ready(orr2), .data(od2));
  m4_update_r u_dut2 (.clk, .rst_n, .inst_valid(iv2), .inst_ready(ir2), .inst,
    .r_valid(rv2), .r_ready(rr2), .r_data(rd2), .ap_valid(av2), .ap_ready(ar2), .ap_data(ad2),
    .out_valid(ov2), .out_ready(orr2), .out_data(od2));

  task automatic issue(real alpha);
    inst = '{len: 32'(LEN), alpha: $realtobits(alpha), q_id: 3'd0};
    for (int i = 0; i < LEN; i++) begin
      real r, a;
      r = rnd(); a = rnd();
      u_r.push($realtobits(r));  u_ap.push($realtobits(a));
      u_r2.push($realtobits(r)); u_ap2.push($realtobits(a));
      u_out.expect_word($realtobits(r - alpha * a));
      u_out2.expect_word($realtobits(r - alpha * a));
    end
    @(negedge clk);
    iv = 1'b1; iv2 = 1'b1;
    while (!(ir && ir2)) @(negedge clk);
    @(negedge clk);
    iv = 1'b0; iv2 = 1'b0;
  endtask

  longint first_cyc;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    issue(0.75);
    while (u_out.got < LEN || u_out2.got < LEN) @(negedge clk);
    // rate: LEN results in LEN consecutive cycles on the free-flowing instance
    checks++;
    if (u_out2.last_cyc - first_cyc != LEN - 1) begin
      failures++;
      $display("FAIL: %0d results took %0d cycles", LEN, u_out2.last_cyc - first_cyc + 1);
    end
    issue(-3.5e-3);
    while (u_out.got < 2 * LEN || u_out2.got < 2 * LEN) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += u_out.got + u_out2.got;
    failures += u_out.errors + u_out2.errors;
    checks++;
    if (!ir) begin failures++; $display("FAIL: instruction did not finish"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ov2 && orr2 && u_out2.got == 0) first_cyc = u_out2.cyc;
endmodule
