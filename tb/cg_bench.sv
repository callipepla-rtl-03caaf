// cg_bench: end-to-end bench of callipepla_top, shared by the reduced-size
// and the full-size top-level testbenches.
//
// What it does.  It builds a sparse symmetric positive-definite test matrix
// (diagonally dominant, 5 to 7 non-zeros per row at column offsets 0, +-1,
// +-D1, +-D2), packs it into the per-channel 512-bit word format of M1,
// loads the matrix, p = x = x0 = 0, r = b = 1 and M = diag(A) into the HBM
// channel models through their write ports (as a host DMA would), starts the
// solver and waits for done.  It runs two solves: the first stops at the
// iteration limit (ITE_MAX1), the second at the tolerance tau = 1e-12 (the
// paper's stopping rule |r|^2 < 1e-12).
//
// Reference.  A software JPCG written with `real` arithmetic follows the same
// operation order as the hardware: SpMV rows summed in column order, dot
// products folded through a DOT_BUF-entry cyclic buffer, the initialisation
// pass with alpha = 1 and beta = 0, and the final x update after the stop.
// The solution x, the iteration count and the last r.r are compared; x and
// r.r must agree to a relative error of 1e-9 (bit-exact agreement is counted
// and reported, not required).
//
// Mechanisms counted (each must happen at least once, or it is a failure):
// initialisation pass, M2 alpha computation, ap forwarded from M1 to M2,
// old p forwarded from M7 to M3, final M3 step after the stop, stop by
// iteration limit, stop by tolerance, M5 FSM phase switch, fast FIFO
// occupancy above the ordinary FIFO depth on both r outputs of M5,
// double-channel swaps of p, x and r, several column segments per SpMV,
// HBM back-pressure, and M4 stalled by M5.
module cg_bench #(
  parameter bit          FULL       = 1'b0,   // 1: top with default parameters
  parameter int unsigned N_CH_A     = 16,
  parameter int unsigned PE_PER_CH  = 8,
  parameter int unsigned XMEM_DEPTH = 4096,
  parameter int unsigned YMEM_DEPTH = 24576,
  parameter int unsigned N          = 20,
  parameter int unsigned D1         = 3,
  parameter int unsigned D2         = 9,
  parameter int unsigned ADEPTH     = 256,
  parameter int unsigned VDEPTH     = 64,
  parameter int unsigned STALL_PCT  = 10,
  parameter int unsigned ITE_MAX1   = 2,
  parameter int unsigned ITE_MAX2   = 200,
  parameter longint      WATCHDOG   = 2000000
);
  import cg_pkg::*;

  localparam int unsigned NPE     = N_CH_A * PE_PER_CH;
  localparam int unsigned DOT_BUF = 8;       // top default
  localparam int unsigned FIFO_D  = 2;       // top default
  localparam int unsigned FAST_D  = 34;      // top default
  localparam int unsigned AW      = PE_PER_CH * 64;
  localparam int unsigned NSEG    = (N + XMEM_DEPTH - 1) / XMEM_DEPTH;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // ------------------------------------------------------------ DUT
  logic              start = 1'b0;
  logic [31:0]       cfg_ite_max = 32'd1;
  fp64_t             cfg_tau = '0;
  logic [31:0]       cfg_a_words [N_CH_A];
  logic              busy, done;
  logic [31:0]       iterations;
  fp64_t             rr_final;
  logic [2:0]        vec_ch;
  logic              m5_phase3;
  logic [5:0]        occ_r_m6, occ_r_wr;
  logic [N_CH_A-1:0] a_req_valid, a_req_ready, a_rsp_valid, a_rsp_ready;
  logic [31:0]       a_req_addr [N_CH_A];
  logic [AW-1:0]     a_rsp_data [N_CH_A];
  logic [7:0]        v_req_valid, v_req_ready, v_rsp_valid, v_rsp_ready;
  logic [31:0]       v_req_addr [8];
  fp64_t             v_rsp_data [8];
  logic [6:0]        v_wr_valid, v_wr_ready;
  logic [31:0]       v_wr_addr [7];
  fp64_t             v_wr_data [7];

  if (FULL) begin : g_dut
    callipepla_top u_dut (
      .clk, .rst_n, .start, .cfg_n(N), .cfg_ite_max, .cfg_tau, .cfg_a_words,
      .busy, .done, .iterations, .rr_final, .vec_ch, .m5_phase3, .occ_r_m6, .occ_r_wr,
      .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
      .v_req_valid, .v_req_ready, .v_req_addr, .v_rsp_valid, .v_rsp_ready, .v_rsp_data,
      .v_wr_valid, .v_wr_ready, .v_wr_addr, .v_wr_data);
  end else begin : g_dut
    callipepla_top #(.N_CH_A(N_CH_A), .PE_PER_CH(PE_PER_CH), .XMEM_DEPTH(XMEM_DEPTH),
                     .YMEM_DEPTH(YMEM_DEPTH)) u_dut (
      .clk, .rst_n, .start, .cfg_n(N), .cfg_ite_max, .cfg_tau, .cfg_a_words,
      .busy, .done, .iterations, .rr_final, .vec_ch, .m5_phase3, .occ_r_m6, .occ_r_wr,
      .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
      .v_req_valid, .v_req_ready, .v_req_addr, .v_rsp_valid, .v_rsp_ready, .v_rsp_data,
      .v_wr_valid, .v_wr_ready, .v_wr_addr, .v_wr_data);
  end

  // ------------------------------------------------------------ memory models
  logic              ld = 1'b0;
  int                a_len [N_CH_A];
  int                a_ptr [N_CH_A];
  logic [AW-1:0]     a_img [N_CH_A][ADEPTH];
  int                v_len [8];
  int                v_ptr [8];
  fp64_t             v_img [8][VDEPTH];
  logic [N_CH_A-1:0] a_wr_ready;
  logic [7:0]        vm_wr_ready;
  int                stall_total;

  for (genvar c = 0; c < N_CH_A; c++) begin : g_a
    logic wv;
    assign wv = ld && (a_ptr[c] < a_len[c]);
    hbm_chan_model #(.DW(AW), .DEPTH(ADEPTH), .LAT(8), .STALL_PCT(STALL_PCT)) u_m (
      .clk, .rst_n,
      .req_valid(a_req_valid[c]), .req_ready(a_req_ready[c]), .req_addr(a_req_addr[c]),
      .rsp_valid(a_rsp_valid[c]), .rsp_ready(a_rsp_ready[c]), .rsp_data(a_rsp_data[c]),
      .wr_valid(wv), .wr_ready(a_wr_ready[c]), .wr_addr(a_ptr[c]),
      .wr_data(a_img[c][a_ptr[c] % ADEPTH]));
    always @(posedge clk) if (wv && a_wr_ready[c]) a_ptr[c] <= a_ptr[c] + 1;
  end

  for (genvar c = 0; c < 8; c++) begin : g_v
    logic        wv;
    logic [31:0] wa;
    fp64_t       wd;
    if (c < 7) begin : g_w
      assign wv = ld ? (v_ptr[c] < v_len[c]) : v_wr_valid[c];
      assign wa = ld ? v_ptr[c] : v_wr_addr[c];
      assign wd = ld ? v_img[c][v_ptr[c] % VDEPTH] : v_wr_data[c];
      assign v_wr_ready[c] = vm_wr_ready[c] && !ld;
    end else begin : g_w
      assign wv = ld && (v_ptr[c] < v_len[c]);
      assign wa = v_ptr[c];
      assign wd = v_img[c][v_ptr[c] % VDEPTH];
    end
    hbm_chan_model #(.DW(64), .DEPTH(VDEPTH), .LAT(8), .STALL_PCT(STALL_PCT)) u_m (
      .clk, .rst_n,
      .req_valid(v_req_valid[c]), .req_ready(v_req_ready[c]), .req_addr(v_req_addr[c]),
      .rsp_valid(v_rsp_valid[c]), .rsp_ready(v_rsp_ready[c]), .rsp_data(v_rsp_data[c]),
      .wr_valid(wv), .wr_ready(vm_wr_ready[c]), .wr_addr(wa), .wr_data(wd));
    always @(posedge clk) if (ld && wv && vm_wr_ready[c]) v_ptr[c] <= v_ptr[c] + 1;
  end

  // ------------------------------------------------------------ test matrix
  function automatic bit is_nz(int i, int j);
    int d;
    if (i < 0 || j < 0 || i >= int'(N) || j >= int'(N)) return 1'b0;
    d = (i > j) ? i - j : j - i;
    return d == 0 || d == 1 || d == int'(D1) || d == int'(D2);
  endfunction

  // entries are multiples of 1/16, exact in FP32
  function automatic real aval(int i, int j);
    int lo, hi;
    if (i == j) return 4.0 + real'(i % 8) / 8.0;
    lo = (i < j) ? i : j;
    hi = (i < j) ? j : i;
    return -real'(1 + ((lo * 7 + hi * 13) % 8)) / 16.0;
  endfunction

  function automatic logic [31:0] to_fp32(real v);
    logic [63:0] b;
    b = $realtobits(v);
    if (b[62:0] == 63'd0) return {b[63], 31'd0};
    return {b[63], 8'(int'(b[62:52]) - 1023 + 127), b[51:29]};
  endfunction

  int offs [7];
  initial begin
    offs[0] = -int'(D2); offs[1] = -int'(D1); offs[2] = -1; offs[3] = 0;
    offs[4] = 1; offs[5] = int'(D1); offs[6] = int'(D2);
  end

  task automatic build_matrix();
    int wp, k, maxk, r, j, seg_lo, seg_hi, g;
    int cnt [PE_PER_CH];
    for (int c = 0; c < int'(N_CH_A); c++) begin
      wp = 0;
      for (int s = 0; s < int'(NSEG); s++) begin
        seg_lo = s * int'(XMEM_DEPTH);
        seg_hi = seg_lo + int'(XMEM_DEPTH);
        maxk = 0;
        for (int l = 0; l < int'(PE_PER_CH); l++) begin
          g = c * int'(PE_PER_CH) + l;
          cnt[l] = 0;
          for (r = g; r < int'(N); r += int'(NPE))
            for (int o = 0; o < 7; o++) begin
              j = r + offs[o];
              if (is_nz(r, j) && j >= seg_lo && j < seg_hi) cnt[l]++;
            end
          if (cnt[l] > maxk) maxk = cnt[l];
        end
        for (int w = 0; w <= maxk; w++)
          for (int l = 0; l < int'(PE_PER_CH); l++)
            a_img[c][wp + w][64*l +: 64] = {14'd0, NZ_ROW_PAD, 32'd0};
        a_img[c][wp + maxk][63:0] = {NZ_COL_END, NZ_ROW_PAD, 32'd0};
        for (int l = 0; l < int'(PE_PER_CH); l++) begin
          g = c * int'(PE_PER_CH) + l;
          k = 0;
          for (r = g; r < int'(N); r += int'(NPE))
            for (int o = 0; o < 7; o++) begin
              j = r + offs[o];
              if (is_nz(r, j) && j >= seg_lo && j < seg_hi) begin
                a_img[c][wp + k][64*l +: 64] = {14'(j - seg_lo), 18'(r / int'(NPE)), to_fp32(aval(r, j))};
                k++;
              end
            end
        end
        wp += maxk + 1;
      end
      a_len[c] = wp;
      cfg_a_words[c] = 32'(wp);
      if (wp > int'(ADEPTH)) begin
        $display("bench: matrix channel %0d needs %0d words, model holds %0d", c, wp, ADEPTH);
        failures++;
      end
    end
  endtask

  // ------------------------------------------------------------ reference JPCG
  real ref_x [N];
  real ref_rr;
  int  ref_iter;

  function automatic real dotk(const ref real a [N], const ref real b [N]);
    real buck [DOT_BUF];
    real acc;
    for (int i = 0; i < int'(DOT_BUF); i++) buck[i] = 0.0;
    for (int i = 0; i < int'(N); i++) buck[i % DOT_BUF] = buck[i % DOT_BUF] + a[i] * b[i];
    acc = 0.0;
    for (int i = 0; i < int'(DOT_BUF); i++) acc = acc + buck[i];
    return acc;
  endfunction

  task automatic spmv(const ref real p [N], ref real y [N]);
    int j;
    for (int i = 0; i < int'(N); i++) begin
      y[i] = 0.0;
      for (int o = 0; o < 7; o++) begin
        j = i + offs[o];
        if (is_nz(i, j)) y[i] = y[i] + aval(i, j) * p[j];
      end
    end
  endtask

  task automatic ref_solve(int ite_max, real tau);
    real x [N], p [N], r [N], z [N], ap [N], pold [N];
    real alpha, beta, rz, rz_new, rr;
    int  iter;
    bit  init;
    for (int i = 0; i < int'(N); i++) begin
      x[i] = 0.0; p[i] = 0.0; r[i] = 1.0;
    end
    init = 1'b1;
    iter = 0;
    rz   = 0.0;
    alpha = 0.0;
    forever begin
      spmv(p, ap);
      if (init) alpha = 1.0;
      else alpha = rz / dotk(p, ap);
      for (int i = 0; i < int'(N); i++) begin
        r[i] = r[i] - alpha * ap[i];
        z[i] = r[i] / aval(i, i);
      end
      rz_new = dotk(r, z);
      rr     = dotk(r, r);
      if (rr < tau || iter == ite_max) begin
        if (!init) for (int i = 0; i < int'(N); i++) x[i] = x[i] + alpha * p[i];
        break;
      end
      beta = init ? 0.0 : rz_new / rz;
      for (int i = 0; i < int'(N); i++) begin
        pold[i] = p[i];
        p[i] = z[i] + beta * p[i];
        if (!init) x[i] = x[i] + alpha * pold[i];
      end
      rz   = rz_new;
      init = 1'b0;
      iter++;
    end
    for (int i = 0; i < int'(N); i++) ref_x[i] = x[i];
    ref_rr   = rr;
    ref_iter = iter;
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_init, n_m2, n_fin, n_ap_fwd, n_pold_fwd, n_phase_sw, n_fast_m6, n_fast_wr;
  int n_swap_p, n_swap_x, n_swap_r, n_loadx, n_m4_stall, n_stop_max, n_stop_tau;
  logic       last_phase;
  logic [2:0] last_ch;
  logic [2:0] last_m1_state;
  initial begin
    n_init = 0; n_m2 = 0; n_fin = 0; n_ap_fwd = 0; n_pold_fwd = 0; n_phase_sw = 0;
    n_fast_m6 = 0; n_fast_wr = 0; n_swap_p = 0; n_swap_x = 0; n_swap_r = 0;
    n_loadx = 0; n_m4_stall = 0; n_stop_max = 0; n_stop_tau = 0;
    last_phase = 1'b0; last_ch = '0; last_m1_state = '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (g_dut.u_dut.ccmp_v[7] && g_dut.u_dut.ccmp_r[7] && g_dut.u_dut.ccmp_i.q_id == 3'd0) n_init++;
    if (g_dut.u_dut.ccmp_v[2] && g_dut.u_dut.ccmp_r[2]) n_m2++;
    if (g_dut.u_dut.ccmp_v[3] && g_dut.u_dut.ccmp_r[3] && g_dut.u_dut.ccmp_i.q_id == 3'd0) n_fin++;
    if (g_dut.u_dut.ap_m2_iv && g_dut.u_dut.ap_m2_ir) n_ap_fwd++;
    if (g_dut.u_dut.pold_m3_iv && g_dut.u_dut.pold_m3_ir) n_pold_fwd++;
    if (g_dut.u_dut.r4_m5_iv && !g_dut.u_dut.r4_m5_ir) n_m4_stall++;
    if (occ_r_m6 > 6'(FIFO_D)) n_fast_m6++;
    if (occ_r_wr > 6'(FIFO_D)) n_fast_wr++;
    if (m5_phase3 != last_phase) n_phase_sw++;
    if (vec_ch[0] != last_ch[0]) n_swap_p++;
    if (vec_ch[1] != last_ch[1]) n_swap_x++;
    if (vec_ch[2] != last_ch[2]) n_swap_r++;
    if (g_dut.u_dut.u_m1.state == 3'd2 && last_m1_state != 3'd2) n_loadx++;
    last_phase    <= m5_phase3;
    last_ch       <= vec_ch;
    last_m1_state <= g_dut.u_dut.u_m1.state;
  end

  // ------------------------------------------------------------ helpers
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_vectors();
    for (int c = 0; c < 8; c++) begin
      v_len[c] = 0;
      v_ptr[c] = 0;
    end
    for (int c = 0; c < int'(N_CH_A); c++) a_ptr[c] = 0;
    for (int i = 0; i < int'(N); i++) begin
      v_img[0 + vec_ch[0]][i] = 64'd0;                  // p = x0
      v_img[2 + vec_ch[1]][i] = 64'd0;                  // x = x0
      v_img[4 + vec_ch[2]][i] = $realtobits(1.0);       // r = b
      v_img[7][i]             = $realtobits(aval(i, i)); // M = diag(A)
    end
    v_len[0 + vec_ch[0]] = N;
    v_len[2 + vec_ch[1]] = N;
    v_len[4 + vec_ch[2]] = N;
    v_len[7]             = N;
    @(negedge clk);
    ld = 1'b1;
    forever begin
      bit all;
      @(negedge clk);
      all = 1'b1;
      for (int c = 0; c < 8; c++) if (v_ptr[c] < v_len[c]) all = 1'b0;
      for (int c = 0; c < int'(N_CH_A); c++) if (a_ptr[c] < a_len[c]) all = 1'b0;
      if (all) break;
    end
    ld = 1'b0;
  endtask

  function automatic real rd_x(int i);
    return vec_ch[1] ? $bitstoreal(g_v[3].u_m.mem[i]) : $bitstoreal(g_v[2].u_m.mem[i]);
  endfunction

  task automatic run_solve(int ite_max, string tag);
    longint t0, t1;
    int     exact, bad;
    real    e, m;
    ref_solve(ite_max, 1.0e-12);
    load_vectors();
    cfg_ite_max = 32'(ite_max);
    cfg_tau     = $realtobits(1.0e-12);
    @(negedge clk);
    start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    t1 = cyc;
    $display("%s: %0d iterations in %0d cycles (reference %0d), rr=%g (reference %g)",
             tag, iterations, t1 - t0, ref_iter, $bitstoreal(rr_final), ref_rr);
    check(iterations == 32'(ref_iter), {tag, ": iteration count"});
    e = $bitstoreal(rr_final) - ref_rr;
    m = (ref_rr < 0.0) ? -ref_rr : ref_rr;
    check((e < 0.0 ? -e : e) <= 1.0e-9 * m, {tag, ": final r.r"});
    if (ite_max == int'(iterations)) n_stop_max++;
    else if ($bitstoreal(rr_final) < 1.0e-12) n_stop_tau++;
    exact = 0;
    bad   = 0;
    for (int i = 0; i < int'(N); i++) begin
      real hv;
      hv = rd_x(i);
      if ($realtobits(hv) == $realtobits(ref_x[i])) exact++;
      e = hv - ref_x[i];
      m = (ref_x[i] < 0.0) ? -ref_x[i] : ref_x[i];
      if ((e < 0.0 ? -e : e) > 1.0e-9 * m + 1.0e-300) begin
        if (bad < 5) $display("%s: x[%0d] = %g, expected %g", tag, i, hv, ref_x[i]);
        bad++;
      end
      checks++;
    end
    failures += bad;
    $display("%s: x bit-exact in %0d of %0d elements", tag, exact, N);
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ main
  initial begin
    for (int c = 0; c < 8; c++) begin
      v_len[c] = 0; v_ptr[c] = 0;
      for (int i = 0; i < int'(VDEPTH); i++) v_img[c][i] = '0;
    end
    for (int c = 0; c < int'(N_CH_A); c++) begin
      a_len[c] = 0; a_ptr[c] = 0; cfg_a_words[c] = '0;
      for (int i = 0; i < int'(ADEPTH); i++) a_img[c][i] = '0;
    end
    build_matrix();
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_solve(ITE_MAX1, "solve 1 (iteration limit)");
    run_solve(ITE_MAX2, "solve 2 (tolerance)");
    $display("mechanisms: init=%0d m2=%0d fin=%0d ap_fwd=%0d pold_fwd=%0d m5_switch=%0d",
             n_init, n_m2, n_fin, n_ap_fwd, n_pold_fwd, n_phase_sw);
    $display("mechanisms: fast_r_m6=%0d fast_r_wr=%0d swap_p=%0d swap_x=%0d swap_r=%0d",
             n_fast_m6, n_fast_wr, n_swap_p, n_swap_x, n_swap_r);
    $display("mechanisms: x_segments_loaded=%0d m4_stalled=%0d stop_max=%0d stop_tau=%0d hbm_stalls=%0d",
             n_loadx, n_m4_stall, n_stop_max, n_stop_tau, stall_sum());
    check(n_init == 2, "init pass once per solve");
    check(n_m2 > 0, "M2 alpha computed");
    check(n_fin == 2, "final M3 step once per solve");
    check(n_ap_fwd > 0, "ap forwarded M1 -> M2");
    check(n_pold_fwd > 0, "old p forwarded M7 -> M3");
    check(n_phase_sw > 0, "M5 FSM switched phase");
    check(n_fast_m6 > 0, "fast FIFO r -> M6 held more than the default depth");
    check(n_fast_wr > 0, "fast FIFO r -> memory held more than the default depth");
    check(n_swap_p > 0 && n_swap_x > 0 && n_swap_r > 0, "double-channel swaps");
    check(NSEG < 2 || n_loadx > n_m2, "several column segments per SpMV");
    check(n_m4_stall > 0, "M4 stalled by M5");
    check(n_stop_max == 1, "stop by iteration limit");
    check(n_stop_tau == 1, "stop by tolerance");
    check(STALL_PCT == 0 || stall_sum() > 0, "HBM back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int stall_sum();
    int s;
    s = g_v[0].u_m.stall_cnt + g_v[1].u_m.stall_cnt + g_v[2].u_m.stall_cnt +
        g_v[3].u_m.stall_cnt + g_v[4].u_m.stall_cnt + g_v[5].u_m.stall_cnt +
        g_v[6].u_m.stall_cnt + g_v[7].u_m.stall_cnt;
    return s;
  endfunction
endmodule
