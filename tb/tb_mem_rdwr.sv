// tb_mem_rdwr: self-checking testbench of the Rd/Wr memory module with the
// double off-chip channel scheme (two HBM channel models, 20 % refused
// requests).
//
// Sequence: read-only from channel 0; read-and-write, which must read channel
// 0, write channel 1, pulse resp once and swap the current channel; a read
// that must now come from channel 1 and return what was just written; a
// write-only instruction into channel 1; and a second read-and-write that
// swaps back.  Memory contents are checked after each write.
module tb_mem_rdwr;
  import cg_pkg::*;
  localparam int N = 60;
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

  logic iv = 1'b0, ir, resp, cur;  inst_rdwr_t inst = '0;
  logic rv, rr, wv, wr;
  fp64_t rd, wd;
  logic [1:0]  qv, qr, pv, pr, cv, cr;
  logic [31:0] qa [2];
  fp64_t       pd [2];
  logic [31:0] ca [2];
  fp64_t       cd [2];
  hbm_chan_model #(.DW(64), .DEPTH(128), .LAT(6), .STALL_PCT(20)) u_h0 (.clk, .rst_n,
    .req_valid(qv[0]), .req_ready(qr[0]), .req_addr(qa[0]), .rsp_valid(pv[0]), .rsp_ready(pr[0]), .rsp_data(pd[0]),
    .wr_valid(cv[0]), .wr_ready(cr[0]), .wr_addr(ca[0]), .wr_data(cd[0]));
  hbm_chan_model #(.DW(64), .DEPTH(128), .LAT(6), .STALL_PCT(20)) u_h1 (.clk, .rst_n,
    .req_valid(qv[1]), .req_ready(qr[1]), .req_addr(qa[1]), .rsp_valid(pv[1]), .rsp_ready(pr[1]), .rsp_data(pd[1]),
    .wr_valid(cv[1]), .wr_ready(cr[1]), .wr_addr(ca[1]), .wr_data(cd[1]));
  tb_sink #(.W(64), .NAME("rd")) u_k (.clk, .rst_n, .valid(rv), .ready(rr), .data(rd));
  tb_src  #(.W(64)) u_s (.clk, .rst_n, .valid(wv), .ready(wr), .data(wd));
  mem_rdwr #(.NCH(2)) u_dut (.clk, .rst_n, .inst_valid(iv), .inst_ready(ir), .inst,
    .rd_valid(rv), .rd_ready(rr), .rd_data(rd), .wr_valid(wv), .wr_ready(wr), .wr_data(wd),
    .ch_req_valid(qv), .ch_req_ready(qr), .ch_req_addr(qa),
    .ch_rsp_valid(pv), .ch_rsp_ready(pr), .ch_rsp_data(pd),
    .ch_wr_valid(cv), .ch_wr_ready(cr), .ch_wr_addr(ca), .ch_wr_data(cd),
    .resp, .cur_ch(cur));

  int resps = 0;
  always @(posedge clk) if (rst_n && resp) resps++;

  fp64_t wdat [N];

  task automatic issue(bit r, bit w, int base);
    inst = '{rd: r, wr: w, base_addr: 32'(base), len: 32'(N)};
    for (int i = 0; i < N; i++) begin
      if (r) u_k.expect_word(cur ? u_h1.mem[base + i] : u_h0.mem[base + i]);
      if (w) begin
        wdat[i] = {$urandom, $urandom};
        u_s.push(wdat[i]);
      end
    end
    @(negedge clk);
    iv = 1'b1;
    while (!ir) @(negedge clk);
    @(negedge clk);
    iv = 1'b0;
    while (!ir) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  task automatic check_mem(bit ch, int base, string what);
    int bad;
    bad = 0;
    for (int i = 0; i < N; i++)
      if ((ch ? u_h1.mem[base + i] : u_h0.mem[base + i]) != wdat[i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL: %s: %0d words wrong", what, bad); end
  endtask

  task automatic expect_state(bit c, int nresp, string what);
    checks++;
    if (cur != c || resps != nresp) begin
      failures++;
      $display("FAIL: %s: channel %0d resp %0d", what, cur, resps);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    for (int i = 0; i < 128; i++) begin
      u_h0.mem[i] = {$urandom, $urandom};
      u_h1.mem[i] = {$urandom, $urandom};
    end
    rst_n = 1'b1;
    @(negedge clk);
    issue(1'b1, 1'b0, 3);
    expect_state(1'b0, 0, "read only");
    issue(1'b1, 1'b1, 0);
    check_mem(1'b1, 0, "read-and-write into channel 1");
    expect_state(1'b1, 1, "read-and-write swaps");
    issue(1'b1, 1'b0, 0);                 // reads back what was written
    expect_state(1'b1, 1, "read only after swap");
    issue(1'b0, 1'b1, 40);
    check_mem(1'b1, 40, "write only into current channel");
    expect_state(1'b1, 2, "write only");
    issue(1'b1, 1'b1, 10);
    check_mem(1'b0, 10, "read-and-write into channel 0");
    expect_state(1'b0, 3, "second swap");
    checks += u_k.got;
    failures += u_k.errors;
    checks++;
    if (u_k.got != 4 * N) begin failures++; $display("FAIL: %0d words read", u_k.got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
