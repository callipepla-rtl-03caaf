// tb_mem_rd: self-checking testbench of the read-only memory module (RdA,
// Rd M, and the read engine of Rd/Wr).
//
// A 512-bit instance (a matrix channel) reads from an HBM channel model that
// refuses 30 % of requests and returns data 8 cycles late, into a sink with
// random back-pressure: three instructions of different base and length must
// return exactly the words stored there, in order.  A 64-bit instance with a
// free-flowing sink checks the rate: after the memory latency one word per
// cycle (LEN words in LEN consecutive cycles).
module tb_mem_rd;
  import cg_pkg::*;
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

  // wide instance with stalls
  logic iv = 1'b0, ir;  inst_rdwr_t inst = '0;
  logic qv, qr, pv, pr, ov, orr;
  logic [31:0] qa;
  logic [511:0] pd, od;
  hbm_chan_model #(.DW(512), .DEPTH(256), .LAT(8), .STALL_PCT(30)) u_h (.clk, .rst_n,
    .req_valid(qv), .req_ready(qr), .req_addr(qa), .rsp_valid(pv), .rsp_ready(pr), .rsp_data(pd),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));
  tb_sink #(.W(512), .NAME("wide")) u_k (.clk, .rst_n, .valid(ov), .ready(orr), .data(od));
  mem_rd #(.DW(512)) u_dut (.clk, .rst_n, .inst_valid(iv), .inst_ready(ir), .inst,
    .req_valid(qv), .req_ready(qr), .req_addr(qa), .rsp_valid(pv), .rsp_ready(pr), .rsp_data(pd),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  // narrow free-flowing instance
  logic iv2 = 1'b0, ir2;
  logic qv2, qr2, pv2, pr2, ov2, orr2;
  logic [31:0] qa2;
  logic [63:0] pd2, od2;
  hbm_chan_model #(.DW(64), .DEPTH(256), .LAT(8), .STALL_PCT(0)) u_h2 (.clk, .rst_n,
    .req_valid(qv2), .req_ready(qr2), .req_addr(qa2), .rsp_valid(pv2), .rsp_ready(pr2), .rsp_data(pd2),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));
  tb_sink #(.W(64), .RAND(1'b0), .NAME("narrow")) u_k2 (.clk, .rst_n, .valid(ov2), .ready(orr2), .data(od2));
  mem_rd #(.DW(64)) u_dut2 (.clk, .rst_n, .inst_valid(iv2), .inst_ready(ir2), .inst,
    .req_valid(qv2), .req_ready(qr2), .req_addr(qa2), .rsp_valid(pv2), .rsp_ready(pr2), .rsp_data(pd2),
    .out_valid(ov2), .out_ready(orr2), .out_data(od2));

  longint first = -1;
  always @(posedge clk) if (rst_n && ov2 && orr2 && first < 0) first <= u_k2.cyc;

  task automatic issue(int base, int len, bit both);
    inst = '{rd: 1'b1, wr: 1'b0, base_addr: 32'(base), len: 32'(len)};
    for (int i = 0; i < len; i++) begin
      u_k.expect_word(u_h.mem[base + i]);
      if (both) u_k2.expect_word(u_h2.mem[base + i]);
    end
    @(negedge clk);
    iv = 1'b1; iv2 = both;
    while (!(ir && (ir2 || !both))) @(negedge clk);
    @(negedge clk);
    iv = 1'b0; iv2 = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      u_h.mem[i]  = {16{$urandom}};
      u_h2.mem[i] = {$urandom, $urandom};
    end
    rst_n = 1'b1;
    issue(5, 100, 1'b1);
    while (u_k.got < 100 || u_k2.got < 100) @(negedge clk);
    checks++;
    if (u_k2.last_cyc - first != 99) begin
      failures++;
      $display("FAIL: 100 words took %0d cycles", u_k2.last_cyc - first + 1);
    end
    issue(200, 50, 1'b0);
    issue(0, 1, 1'b0);
    while (u_k.got < 151) @(negedge clk);
    repeat (20) @(negedge clk);
    checks += u_k.got + u_k2.got + 1;
    failures += u_k.errors + u_k2.errors;
    if (!ir) begin failures++; $display("FAIL: instruction not finished"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
