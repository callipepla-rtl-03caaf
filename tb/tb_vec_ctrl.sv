// tb_vec_ctrl: self-checking testbench of a vector control module (VecCtrl)
// with four destinations, as for the p vector.
//
// For each Type-I instruction it checks the Type-III instruction sent to the
// memory module ({rd, wr, base_addr, len} copied), that every element read
// goes to the destination named by q_id and to no other, and that the
// elements of the write source reach the memory write stream in order.
// Memory-side streams have random gaps and back-pressure.
module tb_vec_ctrl;
  import cg_pkg::*;
  localparam int N = 40;
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

  logic iv = 1'b0, ir;  inst_vctrl_t inst = '0;
  logic miv, mir;  inst_rdwr_t mi;
  logic mrv, mrr, mwv, mwr, sv, sr;
  fp64_t mrd, mwd, sd, dd;
  logic [3:0] dv, dr;
  tb_sink #(.W($bits(inst_rdwr_t)), .NAME("mem_inst")) u_mi (.clk, .rst_n, .valid(miv), .ready(mir), .data(mi));
  tb_src  #(.W(64)) u_mr (.clk, .rst_n, .valid(mrv), .ready(mrr), .data(mrd));
  tb_sink #(.W(64), .NAME("mem_wr")) u_mw (.clk, .rst_n, .valid(mwv), .ready(mwr), .data(mwd));
  tb_src  #(.W(64)) u_sr (.clk, .rst_n, .valid(sv), .ready(sr), .data(sd));
  tb_sink #(.W(64), .NAME("dst0")) u_d0 (.clk, .rst_n, .valid(dv[0]), .ready(dr[0]), .data(dd));
  tb_sink #(.W(64), .NAME("dst1")) u_d1 (.clk, .rst_n, .valid(dv[1]), .ready(dr[1]), .data(dd));
  tb_sink #(.W(64), .NAME("dst2")) u_d2 (.clk, .rst_n, .valid(dv[2]), .ready(dr[2]), .data(dd));
  tb_sink #(.W(64), .NAME("dst3")) u_d3 (.clk, .rst_n, .valid(dv[3]), .ready(dr[3]), .data(dd));
  vec_ctrl #(.NDEST(4)) u_dut (.clk, .rst_n, .inst_valid(iv), .inst_ready(ir), .inst,
    .mem_inst_valid(miv), .mem_inst_ready(mir), .mem_inst(mi),
    .mem_rd_valid(mrv), .mem_rd_ready(mrr), .mem_rd_data(mrd),
    .mem_wr_valid(mwv), .mem_wr_ready(mwr), .mem_wr_data(mwd),
    .dst_valid(dv), .dst_ready(dr), .dst_data(dd),
    .src_valid(sv), .src_ready(sr), .src_data(sd));

  int exp_d [4];
  inst_rdwr_t exp_mi;
  int n_wr;

  task automatic issue(bit r, bit w, int base, int q);
    inst = '{rd: r, wr: w, base_addr: 32'(base), len: 32'(N), q_id: 3'(q)};
    exp_mi = '{rd: r, wr: w, base_addr: 32'(base), len: 32'(N)};
    u_mi.expect_word(exp_mi);
    for (int i = 0; i < N; i++) begin
      fp64_t v;
      if (r) begin
        v = {$urandom, $urandom};
        u_mr.push(v);
        case (q)
          0: u_d0.expect_word(v);
          1: u_d1.expect_word(v);
          2: u_d2.expect_word(v);
          default: u_d3.expect_word(v);
        endcase
        exp_d[q]++;
      end
      if (w) begin
        v = {$urandom, $urandom};
        u_sr.push(v);
        u_mw.expect_word(v);
        n_wr++;
      end
    end
    @(negedge clk);
    iv = 1'b1;
    while (!ir) @(negedge clk);
    @(negedge clk);
    iv = 1'b0;
    while (!ir) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    for (int d = 0; d < 4; d++) exp_d[d] = 0;
    n_wr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    issue(1'b1, 1'b0, 0, 0);
    issue(1'b1, 1'b0, 7, 1);
    issue(1'b1, 1'b1, 0, 3);
    issue(1'b1, 1'b0, 12, 2);
    issue(1'b0, 1'b1, 100, 0);
    repeat (10) @(negedge clk);
    checks += u_mi.got + u_mw.got + u_d0.got + u_d1.got + u_d2.got + u_d3.got;
    failures += u_mi.errors + u_mw.errors + u_d0.errors + u_d1.errors + u_d2.errors + u_d3.errors;
    checks += 3;
    if (u_mi.got != 5) begin failures++; $display("FAIL: %0d memory instructions", u_mi.got); end
    if (u_d0.got != exp_d[0] || u_d1.got != exp_d[1] || u_d2.got != exp_d[2] || u_d3.got != exp_d[3]) begin
      failures++;
      $display("FAIL: destination counts %0d %0d %0d %0d", u_d0.got, u_d1.got, u_d2.got, u_d3.got);
    end
    if (u_mw.got != n_wr) begin failures++; $display("FAIL: %0d words written", u_mw.got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
