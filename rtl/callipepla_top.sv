// callipepla_top: conjugate-gradient accelerator with a stream-centric
// instruction set, vector streaming reuse and mixed-precision SpMV.
//
// The design solves A x = b for a sparse symmetric positive-definite A with
// the Jacobi-preconditioned conjugate gradient method.  A global controller
// issues instructions; eight single-function computation modules (M1 SpMV,
// M2 alpha, M3 update x, M4 update r, M5 left divide, M6 rz, M7 update p, M8
// rr) and five vector control modules (p, r, x, ap, M) exchange vectors as
// FIFO streams, one FP64 element per cycle.  Vectors that a phase can reuse
// flow module to module on chip; only what must cross a scalar dependency
// goes through memory.  The matrix values are FP32, everything else FP64.
//
// Memory ports.  Every memory module talks to one HBM channel (two for the
// double-channel vectors) through plain ports:
//   read:  *_req_valid/ready/addr (word address), *_rsp_valid/ready/data
//          (data in request order)
//   write: *_wr_valid/ready/addr/data (done when accepted)
// a_*  : N_CH_A matrix channels, 512-bit words of 8 packed non-zeros.
// v_*  : 8 vector channels of 64-bit elements, indexed
//        0,1 = p (ping-pong)   2,3 = x (ping-pong)   4,5 = r (ping-pong)
//        6   = ap              7   = M (Jacobi diagonal, read only, so the
//        write ports cover channels 0..6 only)
// The host preloads p = x0 and x = x0 in channels 0 and 2, r = b in channel
// 4, M = diag(A) in channel 7, and the matrix words in the a_* channels
// (format in m1_spmv).  The vectors move between the two channels of their
// pair; vec_ch gives the current one of p (bit 0), x (bit 1) and r (bit 2),
// where the host loads them before start and finds x after done.
//
// Control: pulse start with cfg_* stable; busy is high until done rises.
// iterations is the number of main-loop passes run, rr_final the last r.r.
// FIFO_DEPTH is the depth of the ordinary inter-module FIFOs and
// FAST_FIFO_DEPTH that of the two r FIFOs fed by M5 (at least M5_LAT + 1,
// see m5_left_divide).  The vector z is never stored: Phase-3 recomputes it,
// so there is no z memory module.
//
// Lint note: the occupancy outputs of most link FIFOs are left unconnected
// (only the two fast FIFOs' occupancies are exported as status ports); the
// lint tool reports these empty pins, which is intended.
module callipepla_top
  import cg_pkg::*;
#(
  parameter int unsigned N_CH_A          = 16,
  parameter int unsigned PE_PER_CH       = 8,
  parameter int unsigned XMEM_DEPTH      = 4096,
  parameter int unsigned YMEM_DEPTH      = 24576,
  parameter int unsigned M5_LAT          = 33,
  parameter int unsigned FIFO_DEPTH      = 2,
  parameter int unsigned FAST_FIFO_DEPTH = 34,
  parameter int unsigned DOT_BUF         = 8,
  parameter int unsigned ADD_LAT         = 4,
  parameter int unsigned INST_FIFO_DEPTH = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [31:0]               cfg_n,
  input  logic [31:0]               cfg_ite_max,
  input  fp64_t                     cfg_tau,
  input  logic [31:0]               cfg_a_words [N_CH_A],
  output logic                      busy,
  output logic                      done,
  output logic [31:0]               iterations,
  output fp64_t                     rr_final,
  output logic [2:0]                vec_ch,
  output logic                      m5_phase3,
  output logic [$clog2(FAST_FIFO_DEPTH+1)-1:0] occ_r_m6,
  output logic [$clog2(FAST_FIFO_DEPTH+1)-1:0] occ_r_wr,
  // matrix channels
  output logic [N_CH_A-1:0]         a_req_valid,
  input  logic [N_CH_A-1:0]         a_req_ready,
  output logic [31:0]               a_req_addr [N_CH_A],
  input  logic [N_CH_A-1:0]         a_rsp_valid,
  output logic [N_CH_A-1:0]         a_rsp_ready,
  input  logic [PE_PER_CH*64-1:0]   a_rsp_data [N_CH_A],
  // vector channels
  output logic [7:0]                v_req_valid,
  input  logic [7:0]                v_req_ready,
  output logic [31:0]               v_req_addr [8],
  input  logic [7:0]                v_rsp_valid,
  output logic [7:0]                v_rsp_ready,
  input  fp64_t                     v_rsp_data [8],
  output logic [6:0]                v_wr_valid,
  input  logic [6:0]                v_wr_ready,
  output logic [31:0]               v_wr_addr [7],
  output fp64_t                     v_wr_data [7]
);
  // ------------------------------------------------------------ streams
  logic p_m1_iv, p_m1_ir, p_m1_ov, p_m1_or;
  fp64_t p_m1_id, p_m1_od;
  logic p_m2_iv, p_m2_ir, p_m2_ov, p_m2_or;
  fp64_t p_m2_id, p_m2_od;
  logic p_m3_iv, p_m3_ir, p_m3_ov, p_m3_or;
  fp64_t p_m3_id, p_m3_od;
  logic p_m7_iv, p_m7_ir, p_m7_ov, p_m7_or;
  fp64_t p_m7_id, p_m7_od;
  logic r_m4_iv, r_m4_ir, r_m4_ov, r_m4_or;
  fp64_t r_m4_id, r_m4_od;
  logic ap_m4_iv, ap_m4_ir, ap_m4_ov, ap_m4_or;
  fp64_t ap_m4_id, ap_m4_od;
  logic m_m5_iv, m_m5_ir, m_m5_ov, m_m5_or;
  fp64_t m_m5_id, m_m5_od;
  logic x_m3_iv, x_m3_ir, x_m3_ov, x_m3_or;
  fp64_t x_m3_id, x_m3_od;
  logic ap_wr_iv, ap_wr_ir, ap_wr_ov, ap_wr_or;
  fp64_t ap_wr_id, ap_wr_od;
  logic ap_m2_iv, ap_m2_ir, ap_m2_ov, ap_m2_or;
  fp64_t ap_m2_id, ap_m2_od;
  logic r4_m5_iv, r4_m5_ir, r4_m5_ov, r4_m5_or;
  fp64_t r4_m5_id, r4_m5_od;
  logic z_m6_iv, z_m6_ir, z_m6_ov, z_m6_or;
  fp64_t z_m6_id, z_m6_od;
  logic r5_m6_iv, r5_m6_ir, r5_m6_ov, r5_m6_or;
  fp64_t r5_m6_id, r5_m6_od;
    logic z_m7_iv, z_m7_ir, z_m7_ov, z_m7_or;
  fp64_t z_m7_id, z_m7_od;
  logic r_wr_iv, r_wr_ir, r_wr_ov, r_wr_or;
  fp64_t r_wr_id, r_wr_od;
    logic r6_m8_iv, r6_m8_ir, r6_m8_ov, r6_m8_or;
  fp64_t r6_m8_id, r6_m8_od;
  logic p_wr_iv, p_wr_ir, p_wr_ov, p_wr_or;
  fp64_t p_wr_id, p_wr_od;
  logic pold_m3_iv, pold_m3_ir, pold_m3_ov, pold_m3_or;
  fp64_t pold_m3_id, pold_m3_od;
  logic x_wr_iv, x_wr_ir, x_wr_ov, x_wr_or;
  fp64_t x_wr_id, x_wr_od;

  // ------------------------------------------------------------ controller
  logic        m5_fsm_clear;
  logic        cvp_v, cvp_r, cvr_v, cvr_r, cvx_v, cvx_r, cvap_v, cvap_r, cvm_v, cvm_r;
  inst_vctrl_t cvp_i, cvr_i, cvx_i, cvap_i, cvm_i;
  logic        rda_v, rda_r;
  logic [8:1]  ccmp_v, ccmp_r;
  inst_cmp_t   ccmp_i;
  logic        alpha_v, alpha_r, rz_v, rz_r, rr_v, rr_r;
  fp64_t       alpha_d, rz_d, rr_d;
  logic        resp_ap, resp_p, resp_x, resp_r;

  global_controller u_ctrl (
    .clk, .rst_n, .start, .cfg_n, .cfg_ite_max, .cfg_tau,
    .cfg_base_p(32'd0), .cfg_base_x(32'd0), .cfg_base_r(32'd0),
    .cfg_base_ap(32'd0), .cfg_base_m(32'd0),
    .busy, .done, .iterations, .rr_final, .m5_fsm_clear,
    .vp_valid(cvp_v),   .vp_ready(cvp_r),   .vp_inst(cvp_i),
    .vr_valid(cvr_v),   .vr_ready(cvr_r),   .vr_inst(cvr_i),
    .vx_valid(cvx_v),   .vx_ready(cvx_r),   .vx_inst(cvx_i),
    .vap_valid(cvap_v), .vap_ready(cvap_r), .vap_inst(cvap_i),
    .vm_valid(cvm_v),   .vm_ready(cvm_r),   .vm_inst(cvm_i),
    .rda_valid(rda_v),  .rda_ready(rda_r),
    .cmp_valid(ccmp_v), .cmp_ready(ccmp_r), .cmp_inst(ccmp_i),
    .alpha_valid(alpha_v), .alpha_ready(alpha_r), .alpha_data(alpha_d),
    .rz_valid(rz_v), .rz_ready(rz_r), .rz_data(rz_d),
    .rr_valid(rr_v), .rr_ready(rr_r), .rr_data(rr_d),
    .resp_ap, .resp_p, .resp_x, .resp_r);

  // ------------------------------------------------------------ instruction queues
  // vector controllers: 0 = p, 1 = r, 2 = x, 3 = ap, 4 = M
  logic [4:0]  vq_iv, vq_ir, vq_ov, vq_or;
  inst_vctrl_t vq_id [5];
  inst_vctrl_t vq_od [5];
  assign vq_iv = {cvm_v, cvap_v, cvx_v, cvr_v, cvp_v};
  assign {cvm_r, cvap_r, cvx_r, cvr_r, cvp_r} = vq_ir;
  assign vq_id[0] = cvp_i;
  assign vq_id[1] = cvr_i;
  assign vq_id[2] = cvx_i;
  assign vq_id[3] = cvap_i;
  assign vq_id[4] = cvm_i;

  for (genvar i = 0; i < 5; i++) begin : g_vq
    stream_fifo #(.T(inst_vctrl_t), .DEPTH(INST_FIFO_DEPTH)) u_q (
      .clk, .rst_n, .in_valid(vq_iv[i]), .in_ready(vq_ir[i]), .in_data(vq_id[i]),
      .out_valid(vq_ov[i]), .out_ready(vq_or[i]), .out_data(vq_od[i]), .count());
  end

  logic [8:1]  cq_ov, cq_or;
  inst_cmp_t   cq_od [1:8];
  for (genvar m = 1; m <= 8; m++) begin : g_cq
    stream_fifo #(.T(inst_cmp_t), .DEPTH(INST_FIFO_DEPTH)) u_q (
      .clk, .rst_n, .in_valid(ccmp_v[m]), .in_ready(ccmp_r[m]), .in_data(ccmp_i),
      .out_valid(cq_ov[m]), .out_ready(cq_or[m]), .out_data(cq_od[m]), .count());
  end

  // ------------------------------------------------------------ RdA0..RdA(N-1)
  logic [N_CH_A-1:0]       rda_ir, a_v, a_r;
  logic [PE_PER_CH*64-1:0] a_d [N_CH_A];
  assign rda_r = &rda_ir;
  for (genvar c = 0; c < N_CH_A; c++) begin : g_rda
    mem_rd #(.DW(PE_PER_CH*64)) u_rda (
      .clk, .rst_n,
      .inst_valid(rda_v && rda_r), .inst_ready(rda_ir[c]),
      .inst('{rd: 1'b1, wr: 1'b0, base_addr: 32'd0, len: cfg_a_words[c]}),
      .req_valid(a_req_valid[c]), .req_ready(a_req_ready[c]), .req_addr(a_req_addr[c]),
      .rsp_valid(a_rsp_valid[c]), .rsp_ready(a_rsp_ready[c]), .rsp_data(a_rsp_data[c]),
      .out_valid(a_v[c]), .out_ready(a_r[c]), .out_data(a_d[c]));
  end

  // ------------------------------------------------------------ memory modules
  // Rd/Wr p (channels 0,1), x (2,3), r (4,5), ap (6); Rd M (7)
  logic [3:0]  mi_v, mi_r, mrd_v, mrd_r, mwr_v, mwr_r, mresp;
  inst_rdwr_t  mi_d [4];
  fp64_t       mrd_d [4];
  fp64_t       mwr_d [4];

  mem_rdwr #(.NCH(2)) u_rw_p (
    .clk, .rst_n, .inst_valid(mi_v[0]), .inst_ready(mi_r[0]), .inst(mi_d[0]),
    .rd_valid(mrd_v[0]), .rd_ready(mrd_r[0]), .rd_data(mrd_d[0]),
    .wr_valid(mwr_v[0]), .wr_ready(mwr_r[0]), .wr_data(mwr_d[0]),
    .ch_req_valid(v_req_valid[1:0]), .ch_req_ready(v_req_ready[1:0]), .ch_req_addr(v_req_addr[0:1]),
    .ch_rsp_valid(v_rsp_valid[1:0]), .ch_rsp_ready(v_rsp_ready[1:0]), .ch_rsp_data(v_rsp_data[0:1]),
    .ch_wr_valid(v_wr_valid[1:0]), .ch_wr_ready(v_wr_ready[1:0]), .ch_wr_addr(v_wr_addr[0:1]),
    .ch_wr_data(v_wr_data[0:1]), .resp(mresp[0]), .cur_ch(vec_ch[0]));
  mem_rdwr #(.NCH(2)) u_rw_x (
    .clk, .rst_n, .inst_valid(mi_v[1]), .inst_ready(mi_r[1]), .inst(mi_d[1]),
    .rd_valid(mrd_v[1]), .rd_ready(mrd_r[1]), .rd_data(mrd_d[1]),
    .wr_valid(mwr_v[1]), .wr_ready(mwr_r[1]), .wr_data(mwr_d[1]),
    .ch_req_valid(v_req_valid[3:2]), .ch_req_ready(v_req_ready[3:2]), .ch_req_addr(v_req_addr[2:3]),
    .ch_rsp_valid(v_rsp_valid[3:2]), .ch_rsp_ready(v_rsp_ready[3:2]), .ch_rsp_data(v_rsp_data[2:3]),
    .ch_wr_valid(v_wr_valid[3:2]), .ch_wr_ready(v_wr_ready[3:2]), .ch_wr_addr(v_wr_addr[2:3]),
    .ch_wr_data(v_wr_data[2:3]), .resp(mresp[1]), .cur_ch(vec_ch[1]));
  mem_rdwr #(.NCH(2)) u_rw_r (
    .clk, .rst_n, .inst_valid(mi_v[2]), .inst_ready(mi_r[2]), .inst(mi_d[2]),
    .rd_valid(mrd_v[2]), .rd_ready(mrd_r[2]), .rd_data(mrd_d[2]),
    .wr_valid(mwr_v[2]), .wr_ready(mwr_r[2]), .wr_data(mwr_d[2]),
    .ch_req_valid(v_req_valid[5:4]), .ch_req_ready(v_req_ready[5:4]), .ch_req_addr(v_req_addr[4:5]),
    .ch_rsp_valid(v_rsp_valid[5:4]), .ch_rsp_ready(v_rsp_ready[5:4]), .ch_rsp_data(v_rsp_data[4:5]),
    .ch_wr_valid(v_wr_valid[5:4]), .ch_wr_ready(v_wr_ready[5:4]), .ch_wr_addr(v_wr_addr[4:5]),
    .ch_wr_data(v_wr_data[4:5]), .resp(mresp[2]), .cur_ch(vec_ch[2]));
  mem_rdwr #(.NCH(1)) u_rw_ap (
    .clk, .rst_n, .inst_valid(mi_v[3]), .inst_ready(mi_r[3]), .inst(mi_d[3]),
    .rd_valid(mrd_v[3]), .rd_ready(mrd_r[3]), .rd_data(mrd_d[3]),
    .wr_valid(mwr_v[3]), .wr_ready(mwr_r[3]), .wr_data(mwr_d[3]),
    .ch_req_valid(v_req_valid[6:6]), .ch_req_ready(v_req_ready[6:6]), .ch_req_addr(v_req_addr[6:6]),
    .ch_rsp_valid(v_rsp_valid[6:6]), .ch_rsp_ready(v_rsp_ready[6:6]), .ch_rsp_data(v_rsp_data[6:6]),
    .ch_wr_valid(v_wr_valid[6:6]), .ch_wr_ready(v_wr_ready[6:6]), .ch_wr_addr(v_wr_addr[6:6]),
    .ch_wr_data(v_wr_data[6:6]), .resp(mresp[3]), .cur_ch());

  logic       mm_iv, mm_ir, mm_rv, mm_rr;
  inst_rdwr_t mm_id;
  fp64_t      mm_rd;
  mem_rd #(.DW(64)) u_rd_m (
    .clk, .rst_n, .inst_valid(mm_iv), .inst_ready(mm_ir), .inst(mm_id),
    .req_valid(v_req_valid[7]), .req_ready(v_req_ready[7]), .req_addr(v_req_addr[7]),
    .rsp_valid(v_rsp_valid[7]), .rsp_ready(v_rsp_ready[7]), .rsp_data(v_rsp_data[7]),
    .out_valid(mm_rv), .out_ready(mm_rr), .out_data(mm_rd));

  assign resp_p  = mresp[0];
  assign resp_x  = mresp[1];
  assign resp_r  = mresp[2];
  assign resp_ap = mresp[3];

  // ------------------------------------------------------------ vector controllers
  // VecCtrl p: q_id 0 = M1, 1 = M2, 2 = M3, 3 = M7; written by M7
  logic [3:0] vp_dv, vp_dr;
  fp64_t      vp_dd;
  vec_ctrl #(.NDEST(4)) u_vc_p (
    .clk, .rst_n, .inst_valid(vq_ov[0]), .inst_ready(vq_or[0]), .inst(vq_od[0]),
    .mem_inst_valid(mi_v[0]), .mem_inst_ready(mi_r[0]), .mem_inst(mi_d[0]),
    .mem_rd_valid(mrd_v[0]), .mem_rd_ready(mrd_r[0]), .mem_rd_data(mrd_d[0]),
    .mem_wr_valid(mwr_v[0]), .mem_wr_ready(mwr_r[0]), .mem_wr_data(mwr_d[0]),
    .dst_valid(vp_dv), .dst_ready(vp_dr), .dst_data(vp_dd),
    .src_valid(p_wr_ov), .src_ready(p_wr_or), .src_data(p_wr_od));
  assign {p_m7_iv, p_m3_iv, p_m2_iv, p_m1_iv} = vp_dv;
  assign vp_dr = {p_m7_ir, p_m3_ir, p_m2_ir, p_m1_ir};
  assign p_m1_id = vp_dd;
  assign p_m2_id = vp_dd;
  assign p_m3_id = vp_dd;
  assign p_m7_id = vp_dd;

  // VecCtrl x: q_id 0 = M3; written by M3
  vec_ctrl #(.NDEST(1)) u_vc_x (
    .clk, .rst_n, .inst_valid(vq_ov[2]), .inst_ready(vq_or[2]), .inst(vq_od[2]),
    .mem_inst_valid(mi_v[1]), .mem_inst_ready(mi_r[1]), .mem_inst(mi_d[1]),
    .mem_rd_valid(mrd_v[1]), .mem_rd_ready(mrd_r[1]), .mem_rd_data(mrd_d[1]),
    .mem_wr_valid(mwr_v[1]), .mem_wr_ready(mwr_r[1]), .mem_wr_data(mwr_d[1]),
    .dst_valid(x_m3_iv), .dst_ready(x_m3_ir), .dst_data(x_m3_id),
    .src_valid(x_wr_ov), .src_ready(x_wr_or), .src_data(x_wr_od));

  // VecCtrl r: q_id 0 = M4; written by M5 (Phase-3)
  vec_ctrl #(.NDEST(1)) u_vc_r (
    .clk, .rst_n, .inst_valid(vq_ov[1]), .inst_ready(vq_or[1]), .inst(vq_od[1]),
    .mem_inst_valid(mi_v[2]), .mem_inst_ready(mi_r[2]), .mem_inst(mi_d[2]),
    .mem_rd_valid(mrd_v[2]), .mem_rd_ready(mrd_r[2]), .mem_rd_data(mrd_d[2]),
    .mem_wr_valid(mwr_v[2]), .mem_wr_ready(mwr_r[2]), .mem_wr_data(mwr_d[2]),
    .dst_valid(r_m4_iv), .dst_ready(r_m4_ir), .dst_data(r_m4_id),
    .src_valid(r_wr_ov), .src_ready(r_wr_or), .src_data(r_wr_od));

  // VecCtrl ap: q_id 0 = M4; written by M1
  vec_ctrl #(.NDEST(1)) u_vc_ap (
    .clk, .rst_n, .inst_valid(vq_ov[3]), .inst_ready(vq_or[3]), .inst(vq_od[3]),
    .mem_inst_valid(mi_v[3]), .mem_inst_ready(mi_r[3]), .mem_inst(mi_d[3]),
    .mem_rd_valid(mrd_v[3]), .mem_rd_ready(mrd_r[3]), .mem_rd_data(mrd_d[3]),
    .mem_wr_valid(mwr_v[3]), .mem_wr_ready(mwr_r[3]), .mem_wr_data(mwr_d[3]),
    .dst_valid(ap_m4_iv), .dst_ready(ap_m4_ir), .dst_data(ap_m4_id),
    .src_valid(ap_wr_ov), .src_ready(ap_wr_or), .src_data(ap_wr_od));

  // VecCtrl M: q_id 0 = M5; never written
  vec_ctrl #(.NDEST(1)) u_vc_m (
    .clk, .rst_n, .inst_valid(vq_ov[4]), .inst_ready(vq_or[4]), .inst(vq_od[4]),
    .mem_inst_valid(mm_iv), .mem_inst_ready(mm_ir), .mem_inst(mm_id),
    .mem_rd_valid(mm_rv), .mem_rd_ready(mm_rr), .mem_rd_data(mm_rd),
    .mem_wr_valid(), .mem_wr_ready(1'b0), .mem_wr_data(),
    .dst_valid(m_m5_iv), .dst_ready(m_m5_ir), .dst_data(m_m5_id),
    .src_valid(1'b0), .src_ready(), .src_data(64'd0));

  // ------------------------------------------------------------ computation modules
  m1_spmv #(.N_CH(N_CH_A), .PE_PER_CH(PE_PER_CH), .XMEM_DEPTH(XMEM_DEPTH), .YMEM_DEPTH(YMEM_DEPTH)) u_m1 (
    .clk, .rst_n, .inst_valid(cq_ov[1]), .inst_ready(cq_or[1]), .inst(cq_od[1]),
    .a_valid(a_v), .a_ready(a_r), .a_data(a_d),
    .p_valid(p_m1_ov), .p_ready(p_m1_or), .p_data(p_m1_od),
    .ap_mem_valid(ap_wr_iv), .ap_mem_ready(ap_wr_ir), .ap_mem_data(ap_wr_id),
    .ap_m2_valid(ap_m2_iv), .ap_m2_ready(ap_m2_ir), .ap_m2_data(ap_m2_id));

  m2_dot_alpha #(.DOT_BUF(DOT_BUF), .ADD_LAT(ADD_LAT)) u_m2 (
    .clk, .rst_n, .inst_valid(cq_ov[2]), .inst_ready(cq_or[2]), .inst(cq_od[2]),
    .p_valid(p_m2_ov), .p_ready(p_m2_or), .p_data(p_m2_od),
    .ap_valid(ap_m2_ov), .ap_ready(ap_m2_or), .ap_data(ap_m2_od),
    .alpha_valid(alpha_v), .alpha_ready(alpha_r), .alpha_data(alpha_d));

  m3_update_x u_m3 (
    .clk, .rst_n, .inst_valid(cq_ov[3]), .inst_ready(cq_or[3]), .inst(cq_od[3]),
    .p_m7_valid(pold_m3_ov), .p_m7_ready(pold_m3_or), .p_m7_data(pold_m3_od),
    .p_mem_valid(p_m3_ov), .p_mem_ready(p_m3_or), .p_mem_data(p_m3_od),
    .x_valid(x_m3_ov), .x_ready(x_m3_or), .x_data(x_m3_od),
    .out_valid(x_wr_iv), .out_ready(x_wr_ir), .out_data(x_wr_id));

  m4_update_r u_m4 (
    .clk, .rst_n, .inst_valid(cq_ov[4]), .inst_ready(cq_or[4]), .inst(cq_od[4]),
    .r_valid(r_m4_ov), .r_ready(r_m4_or), .r_data(r_m4_od),
    .ap_valid(ap_m4_ov), .ap_ready(ap_m4_or), .ap_data(ap_m4_od),
    .out_valid(r4_m5_iv), .out_ready(r4_m5_ir), .out_data(r4_m5_id));

  m5_left_divide #(.LAT(M5_LAT)) u_m5 (
    .clk, .rst_n, .fsm_clear(m5_fsm_clear),
    .inst_valid(cq_ov[5]), .inst_ready(cq_or[5]), .inst(cq_od[5]),
    .r_valid(r4_m5_ov), .r_ready(r4_m5_or), .r_data(r4_m5_od),
    .m_valid(m_m5_ov), .m_ready(m_m5_or), .m_data(m_m5_od),
    .z_m6_valid(z_m6_iv), .z_m6_ready(z_m6_ir), .z_m6_data(z_m6_id),
    .r_m6_valid(r5_m6_iv), .r_m6_ready(r5_m6_ir), .r_m6_data(r5_m6_id),
    .z_m7_valid(z_m7_iv), .z_m7_ready(z_m7_ir), .z_m7_data(z_m7_id),
    .r_mem_valid(r_wr_iv), .r_mem_ready(r_wr_ir), .r_mem_data(r_wr_id),
    .fsm_state(m5_phase3));

  m6_dot_rz #(.DOT_BUF(DOT_BUF), .ADD_LAT(ADD_LAT)) u_m6 (
    .clk, .rst_n, .inst_valid(cq_ov[6]), .inst_ready(cq_or[6]), .inst(cq_od[6]),
    .r_valid(r5_m6_ov), .r_ready(r5_m6_or), .r_data(r5_m6_od),
    .z_valid(z_m6_ov), .z_ready(z_m6_or), .z_data(z_m6_od),
    .r_m8_valid(r6_m8_iv), .r_m8_ready(r6_m8_ir), .r_m8_data(r6_m8_id),
    .rz_valid(rz_v), .rz_ready(rz_r), .rz_data(rz_d));

  m7_update_p u_m7 (
    .clk, .rst_n, .inst_valid(cq_ov[7]), .inst_ready(cq_or[7]), .inst(cq_od[7]),
    .p_valid(p_m7_ov), .p_ready(p_m7_or), .p_data(p_m7_od),
    .z_valid(z_m7_ov), .z_ready(z_m7_or), .z_data(z_m7_od),
    .out_valid(p_wr_iv), .out_ready(p_wr_ir), .out_data(p_wr_id),
    .pold_valid(pold_m3_iv), .pold_ready(pold_m3_ir), .pold_data(pold_m3_id));

  m8_dot_rr #(.DOT_BUF(DOT_BUF), .ADD_LAT(ADD_LAT)) u_m8 (
    .clk, .rst_n, .inst_valid(cq_ov[8]), .inst_ready(cq_or[8]), .inst(cq_od[8]),
    .r_valid(r6_m8_ov), .r_ready(r6_m8_or), .r_data(r6_m8_od),
    .rr_valid(rr_v), .rr_ready(rr_r), .rr_data(rr_d));

  // ------------------------------------------------------------ FIFOs between modules
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_p_m1 (
    .clk, .rst_n, .in_valid(p_m1_iv), .in_ready(p_m1_ir), .in_data(p_m1_id),
    .out_valid(p_m1_ov), .out_ready(p_m1_or), .out_data(p_m1_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_p_m2 (
    .clk, .rst_n, .in_valid(p_m2_iv), .in_ready(p_m2_ir), .in_data(p_m2_id),
    .out_valid(p_m2_ov), .out_ready(p_m2_or), .out_data(p_m2_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_p_m3 (
    .clk, .rst_n, .in_valid(p_m3_iv), .in_ready(p_m3_ir), .in_data(p_m3_id),
    .out_valid(p_m3_ov), .out_ready(p_m3_or), .out_data(p_m3_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_p_m7 (
    .clk, .rst_n, .in_valid(p_m7_iv), .in_ready(p_m7_ir), .in_data(p_m7_id),
    .out_valid(p_m7_ov), .out_ready(p_m7_or), .out_data(p_m7_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_r_m4 (
    .clk, .rst_n, .in_valid(r_m4_iv), .in_ready(r_m4_ir), .in_data(r_m4_id),
    .out_valid(r_m4_ov), .out_ready(r_m4_or), .out_data(r_m4_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_ap_m4 (
    .clk, .rst_n, .in_valid(ap_m4_iv), .in_ready(ap_m4_ir), .in_data(ap_m4_id),
    .out_valid(ap_m4_ov), .out_ready(ap_m4_or), .out_data(ap_m4_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_m_m5 (
    .clk, .rst_n, .in_valid(m_m5_iv), .in_ready(m_m5_ir), .in_data(m_m5_id),
    .out_valid(m_m5_ov), .out_ready(m_m5_or), .out_data(m_m5_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_x_m3 (
    .clk, .rst_n, .in_valid(x_m3_iv), .in_ready(x_m3_ir), .in_data(x_m3_id),
    .out_valid(x_m3_ov), .out_ready(x_m3_or), .out_data(x_m3_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_ap_wr (
    .clk, .rst_n, .in_valid(ap_wr_iv), .in_ready(ap_wr_ir), .in_data(ap_wr_id),
    .out_valid(ap_wr_ov), .out_ready(ap_wr_or), .out_data(ap_wr_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_ap_m2 (
    .clk, .rst_n, .in_valid(ap_m2_iv), .in_ready(ap_m2_ir), .in_data(ap_m2_id),
    .out_valid(ap_m2_ov), .out_ready(ap_m2_or), .out_data(ap_m2_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_r4_m5 (
    .clk, .rst_n, .in_valid(r4_m5_iv), .in_ready(r4_m5_ir), .in_data(r4_m5_id),
    .out_valid(r4_m5_ov), .out_ready(r4_m5_or), .out_data(r4_m5_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_z_m6 (
    .clk, .rst_n, .in_valid(z_m6_iv), .in_ready(z_m6_ir), .in_data(z_m6_id),
    .out_valid(z_m6_ov), .out_ready(z_m6_or), .out_data(z_m6_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FAST_FIFO_DEPTH)) u_f_r5_m6 (
    .clk, .rst_n, .in_valid(r5_m6_iv), .in_ready(r5_m6_ir), .in_data(r5_m6_id),
    .out_valid(r5_m6_ov), .out_ready(r5_m6_or), .out_data(r5_m6_od), .count(occ_r_m6));
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_z_m7 (
    .clk, .rst_n, .in_valid(z_m7_iv), .in_ready(z_m7_ir), .in_data(z_m7_id),
    .out_valid(z_m7_ov), .out_ready(z_m7_or), .out_data(z_m7_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FAST_FIFO_DEPTH)) u_f_r_wr (
    .clk, .rst_n, .in_valid(r_wr_iv), .in_ready(r_wr_ir), .in_data(r_wr_id),
    .out_valid(r_wr_ov), .out_ready(r_wr_or), .out_data(r_wr_od), .count(occ_r_wr));
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_r6_m8 (
    .clk, .rst_n, .in_valid(r6_m8_iv), .in_ready(r6_m8_ir), .in_data(r6_m8_id),
    .out_valid(r6_m8_ov), .out_ready(r6_m8_or), .out_data(r6_m8_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_p_wr (
    .clk, .rst_n, .in_valid(p_wr_iv), .in_ready(p_wr_ir), .in_data(p_wr_id),
    .out_valid(p_wr_ov), .out_ready(p_wr_or), .out_data(p_wr_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_pold_m3 (
    .clk, .rst_n, .in_valid(pold_m3_iv), .in_ready(pold_m3_ir), .in_data(pold_m3_id),
    .out_valid(pold_m3_ov), .out_ready(pold_m3_or), .out_data(pold_m3_od), .count());
  stream_fifo #(.T(fp64_t), .DEPTH(FIFO_DEPTH)) u_f_x_wr (
    .clk, .rst_n, .in_valid(x_wr_iv), .in_ready(x_wr_ir), .in_data(x_wr_id),
    .out_valid(x_wr_ov), .out_ready(x_wr_or), .out_data(x_wr_od), .count());
endmodule
