// tb_m5_left_divide: self-checking testbench of M5 (z = r ./ M).
//
// Two instructions of LEN elements.  The first runs in FSM state 0
// (Phase-2): z and r must leave towards M6.  The second runs in state 1
// (Phase-3): z towards M7 and r towards memory.  After fsm_clear the FSM must
// be back in state 0, checked with a third, short instruction.  Timing: in the
// first instruction all streams flow freely and the first z must appear
// exactly LAT = 33 cycles after the first r (the paper's M5 pipeline depth);
// in the second, sources have random gaps and sinks random back-pressure.
// Expected values use `real` division.
module tb_m5_left_divide;
  import cg_pkg::*;
  localparam int LEN = 100, LAT = 33;
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
    return (real'($urandom % 4000) - 2000.0) / 13.0 + 0.25;
  endfunction

  logic iv = 1'b0, ir, clr = 1'b0, st;  inst_cmp_t inst = '0;
  logic rv, rr, mv, mr, z6v, z6r, r6v, r6r, z7v, z7r, rmv, rmr;
  fp64_t rd, md, z6d, r6d, z7d, rmd;
  logic src_rand = 1'b0;
  tb_src  #(.W(64), .RAND(1'b0)) u_r (.clk, .rst_n, .valid(rv), .ready(rr), .data(rd));
  tb_src  #(.W(64), .RAND(1'b0)) u_m (.clk, .rst_n, .valid(mv), .ready(mr), .data(md));
  tb_sink #(.W(64), .RAND(1'b0), .NAME("z_m6"))  u_z6 (.clk, .rst_n, .valid(z6v), .ready(z6r), .data(z6d));
  tb_sink #(.W(64), .RAND(1'b0), .NAME("r_m6"))  u_r6 (.clk, .rst_n, .valid(r6v), .ready(r6r), .data(r6d));
  tb_sink #(.W(64), .RAND(1'b1), .NAME("z_m7"))  u_z7 (.clk, .rst_n, .valid(z7v), .ready(z7r), .data(z7d));
  tb_sink #(.W(64), .RAND(1'b1), .NAME("r_mem")) u_rm (.clk, .rst_n, .valid(rmv), .ready(rmr), .data(rmd));
  // random input gaps for the second instruction
  logic gap;
  always @(posedge clk) gap <= src_rand && ($urandom % 4 == 0);
  m5_left_divide #(.LAT(LAT)) u_dut (.clk, .rst_n, .fsm_clear(clr),
    .inst_valid(iv), .inst_ready(ir), .inst,
    .r_valid(rv && !gap), .r_ready(rr), .r_data(rd),
    .m_valid(mv && !gap), .m_ready(mr), .m_data(md),
    .z_m6_valid(z6v), .z_m6_ready(z6r), .z_m6_data(z6d),
    .r_m6_valid(r6v), .r_m6_ready(r6r), .r_m6_data(r6d),
    .z_m7_valid(z7v), .z_m7_ready(z7r), .z_m7_data(z7d),
    .r_mem_valid(rmv), .r_mem_ready(rmr), .r_mem_data(rmd),
    .fsm_state(st));

  task automatic issue(int len, bit phase3);
    for (int i = 0; i < len; i++) begin
      real r, m;
      r = rnd(); m = rnd();
      u_r.push($realtobits(r));
      u_m.push($realtobits(m));
      if (phase3) begin
        u_z7.expect_word($realtobits(r / m));
        u_rm.expect_word($realtobits(r));
      end else begin
        u_z6.expect_word($realtobits(r / m));
        u_r6.expect_word($realtobits(r));
      end
    end
    inst = '{len: 32'(len), alpha: '0, q_id: 3'd0};
    @(negedge clk);
    iv = 1'b1;
    while (!ir) @(negedge clk);
    @(negedge clk);
    iv = 1'b0;
  endtask

  longint first_r = -1, first_z = -1;
  always @(posedge clk) if (rst_n) begin
    if (r6v && r6r && first_r < 0) first_r <= u_r6.cyc;
    if (z6v && z6r && first_z < 0) first_z <= u_z6.cyc;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (st != 1'b0) begin failures++; $display("FAIL: FSM not in state 0 after reset"); end
    issue(LEN, 1'b0);
    while (u_z6.got < LEN || u_r6.got < LEN) @(negedge clk);
    checks++;
    if (first_z - first_r != LAT) begin
      failures++;
      $display("FAIL: first z %0d cycles after first r, expected %0d", first_z - first_r, LAT);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (st != 1'b1) begin failures++; $display("FAIL: FSM did not advance to state 1"); end
    src_rand = 1'b1;
    issue(LEN, 1'b1);
    while (u_z7.got < LEN || u_rm.got < LEN) @(negedge clk);
    repeat (2) @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    checks++;
    if (st != 1'b0) begin failures++; $display("FAIL: fsm_clear did not return to state 0"); end
    issue(10, 1'b0);
    while (u_z6.got < LEN + 10 || u_r6.got < LEN + 10) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += u_z6.got + u_r6.got + u_z7.got + u_rm.got;
    failures += u_z6.errors + u_r6.errors + u_z7.errors + u_rm.errors;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
