// tb_m6_dot_rz: self-checking testbench of M6 (rz = r . z).
//
// Every r element taken must also leave, unchanged and in order, on the
// output towards M8 (the sink there applies random back-pressure, which M6
// must respect).  Three instructions: a long vector with random input gaps, a vector shorter
// than the delay buffer, and a long free-flowing vector whose timing is
// checked.  The expected sum follows the engine's summation order (element k
// goes to buffer entry k mod L; the L entries are then added in order), so
// results are compared bit for bit.  Timing: Phase II needs one addition per
// ADD_LAT+1 cycles for L entries, the paper's 5*L cycles with ADD_LAT = 4,
// after an ADD_LAT+1 cycle drain of the Phase I adder; the result must appear
// exactly (ADD_LAT+1)*(L+1)+1 cycles after the last element is taken.
module tb_m6_dot_rz;
  import cg_pkg::*;
  localparam int L = 8, ADD_LAT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd();
    return (real'($urandom % 4000) - 2000.0) / 31.0;
  endfunction

  logic iv = 1'b0, ir;  inst_cmp_t inst = '0;
  logic rv, rr, zv, zr, fv, fr, ov, orr;
  fp64_t rd, zd, fd, od;
  tb_src  #(.W(64)) u_r (.clk, .rst_n, .valid(rv), .ready(rr), .data(rd));
  tb_src  #(.W(64)) u_z (.clk, .rst_n, .valid(zv), .ready(zr), .data(zd));
  tb_sink #(.W(64), .NAME("r_m8")) u_fwd (.clk, .rst_n, .valid(fv), .ready(fr), .data(fd));
  m6_dot_rz #(.DOT_BUF(L), .ADD_LAT(ADD_LAT)) u_dut (.clk, .rst_n,
    .inst_valid(iv), .inst_ready(ir), .inst,
    .r_valid(rv), .r_ready(rr), .r_data(rd), .z_valid(zv), .z_ready(zr), .z_data(zd),
    .r_m8_valid(fv), .r_m8_ready(fr), .r_m8_data(fd),
    .rz_valid(ov), .rz_ready(orr), .rz_data(od));
  assign orr = 1'b1;

  longint last_in;
  always @(posedge clk) if (rst_n && rv && rr) last_in <= cyc;

  task automatic run(int len, bit timed);
    real buck [L];
    real acc;
    longint lat;
    for (int i = 0; i < L; i++) buck[i] = 0.0;
    for (int i = 0; i < len; i++) begin
      real v, z;
      v = rnd(); z = rnd();
      u_r.push($realtobits(v));
      u_z.push($realtobits(z));
      u_fwd.expect_word($realtobits(v));
      buck[i % L] = buck[i % L] + v * z;
    end
    acc = 0.0;
    for (int i = 0; i < L; i++) acc = acc + buck[i];
    inst = '{len: 32'(len), alpha: '0, q_id: 3'd0};
    @(negedge clk);
    iv = 1'b1;
    @(negedge clk);
    iv = 1'b0;
    while (!ov) @(negedge clk);
    lat = cyc - last_in;
    checks++;
    if (od != $realtobits(acc)) begin
      failures++;
      $display("FAIL: len %0d: rz = %g, expected %g", len, $bitstoreal(od), acc);
    end
    if (timed) begin
      checks++;
      if (lat != longint'((ADD_LAT + 1) * (L + 1) + 1)) begin
        failures++;
        $display("FAIL: result %0d cycles after the last element, expected %0d", lat, (ADD_LAT + 1) * (L + 1) + 1);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(200, 1'b0);
    run(3, 1'b0);
    run(100, 1'b1);
    checks += u_fwd.got + 1;
    failures += u_fwd.errors;
    if (u_fwd.got != 303) begin failures++; $display("FAIL: %0d r words forwarded", u_fwd.got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
