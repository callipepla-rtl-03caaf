// global_controller: runs the Jacobi-preconditioned conjugate gradient loop
// by issuing stream instructions, and keeps all scalars.
//
// The loop starts at rp = -1, an initialisation pass that reuses the main
// loop body to compute r = b - A*x0, z = M \ r, p = z, rz and rr (the host
// preloads p = x0, x = x0 and r = b).  Each pass has three phases, split
// where a scalar needs a whole vector:
//   Phase-1  M1 ap = A*p (ap written to memory and streamed to M2), then
//            M2 alpha = rz / (p.ap)                      [M2 skipped at rp=-1]
//   Phase-2  M4 r' = r - alpha*ap -> M5 z = M\r' -> M6 rz' = r'.z -> M8 rr
//            (r' and z stay on chip; only r, ap and M are read)
//   check    stop if rr < tau or rp + 1 == ite_max
//   Phase-3  M4 and M5 again (recomputing r' and z instead of storing z),
//            M7 p = z + beta*p with beta = rz'/rz, M3 x = x + alpha*p with
//            the old p forwarded by M7; r', p and x are written back
//            [at rp=-1: alpha = 1, beta = 0, M3 skipped]
// When the check stops a regular pass, the controller issues one last M3
// (p read from memory) so that x matches the final r.
//
// Within a phase the controller issues every instruction back to back into
// the modules' instruction FIFOs; the modules then stream in parallel.  It
// waits for alpha (Phase-1), rz and rr (Phase-2) and for the memory write
// responses of every vector written in the phase before starting the next
// phase, which keeps each vector read behind its last write.
//
// Interface: start/cfg_* (problem size, tau, ite_max, base addresses),
// busy/done/iterations/rr_final; one valid/ready instruction port per
// vector controller, per computation module and one shared port for the
// RdA readers; scalar inputs alpha/rz/rr; resp_* write responses.
//
// The problem size cfg_n is copied into the length field of the issued
// instructions, so those output bits are wires from that input.
module global_controller
  import cg_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] cfg_n,
  input  logic [31:0] cfg_ite_max,
  input  fp64_t       cfg_tau,
  input  logic [31:0] cfg_base_p,
  input  logic [31:0] cfg_base_x,
  input  logic [31:0] cfg_base_r,
  input  logic [31:0] cfg_base_ap,
  input  logic [31:0] cfg_base_m,
  output logic        busy,
  output logic        done,
  output logic [31:0] iterations,
  output fp64_t       rr_final,
  output logic        m5_fsm_clear,
  // Type-I instructions to the vector control modules
  output logic        vp_valid,  input logic vp_ready,  output inst_vctrl_t vp_inst,
  output logic        vr_valid,  input logic vr_ready,  output inst_vctrl_t vr_inst,
  output logic        vx_valid,  input logic vx_ready,  output inst_vctrl_t vx_inst,
  output logic        vap_valid, input logic vap_ready, output inst_vctrl_t vap_inst,
  output logic        vm_valid,  input logic vm_ready,  output inst_vctrl_t vm_inst,
  // start of all RdA readers (each reads its own word count)
  output logic        rda_valid, input logic rda_ready,
  // Type-II instructions to the computation modules M1..M8 (index 1..8)
  output logic [8:1]  cmp_valid,
  input  logic [8:1]  cmp_ready,
  output inst_cmp_t   cmp_inst,
  // scalars
  input  logic        alpha_valid, output logic alpha_ready, input fp64_t alpha_data,
  input  logic        rz_valid,    output logic rz_ready,    input fp64_t rz_data,
  input  logic        rr_valid,    output logic rr_ready,    input fp64_t rr_data,
  // memory write responses
  input  logic        resp_ap,
  input  logic        resp_p,
  input  logic        resp_x,
  input  logic        resp_r
);
  import fp64_pkg::FP64_ONE;
  import fp64_pkg::FP64_ZERO;
  import fp64_pkg::fp64_div;
  import fp64_pkg::fp64_lt;

  typedef enum logic [3:0] {
    S_IDLE, S_P1_ISSUE, S_P1_WAIT, S_P2_ISSUE, S_P2_WAIT, S_CHECK,
    S_P3_ISSUE, S_P3_WAIT, S_FIN_ISSUE, S_FIN_WAIT
  } state_t;

  typedef enum logic [3:0] {
    T_NONE, T_VP, T_VR, T_VX, T_VAP, T_VM, T_RDA,
    T_M1, T_M2, T_M3, T_M4, T_M5, T_M6, T_M7, T_M8
  } target_t;

  state_t      state;
  logic [3:0]  step;
  logic        init;              // rp == -1
  logic [31:0] iter;              // rp + 1
  fp64_t       alpha, beta, rz, rz_new, rr;
  logic        got_alpha, got_rz, got_rr;
  logic        got_ap, got_p, got_x, got_r;

  // ---------------------------------------------------------------- issue
  target_t     tgt;
  inst_vctrl_t vi;
  inst_cmp_t   ci;

  function automatic inst_vctrl_t mk_v(input logic rd, input logic wr, input logic [31:0] base,
                                       input logic [31:0] len, input logic [2:0] q);
    return '{rd: rd, wr: wr, base_addr: base, len: len, q_id: q};
  endfunction

  function automatic inst_cmp_t mk_c(input logic [31:0] len, input fp64_t a, input logic [2:0] q);
    return '{len: len, alpha: a, q_id: q};
  endfunction

  always_comb begin
    tgt = T_NONE;
    vi  = '0;
    ci  = mk_c(cfg_n, FP64_ZERO, 3'd0);
    case (state)
      S_P1_ISSUE: case (step)
        4'd0: begin tgt = T_VAP; vi = mk_v(1'b0, 1'b1, cfg_base_ap, cfg_n, 3'd0); end
        4'd1: begin tgt = T_VP;  vi = mk_v(1'b1, 1'b0, cfg_base_p, cfg_n, QID_P_M1); end
        4'd2: begin tgt = T_RDA; end
        4'd3: begin tgt = T_M1;  ci = mk_c(cfg_n, FP64_ZERO, init ? 3'd0 : QID_CMP_FWD); end
        4'd4: if (!init) begin tgt = T_VP; vi = mk_v(1'b1, 1'b0, cfg_base_p, cfg_n, QID_P_M2); end
        4'd5: if (!init) begin tgt = T_M2; ci = mk_c(cfg_n, rz, 3'd0); end
        default: tgt = T_NONE;
      endcase
      S_P2_ISSUE: case (step)
        4'd0: begin tgt = T_VR;  vi = mk_v(1'b1, 1'b0, cfg_base_r, cfg_n, QID_R_M4); end
        4'd1: begin tgt = T_VAP; vi = mk_v(1'b1, 1'b0, cfg_base_ap, cfg_n, QID_AP_M4); end
        4'd2: begin tgt = T_VM;  vi = mk_v(1'b1, 1'b0, cfg_base_m, cfg_n, QID_M_M5); end
        4'd3: begin tgt = T_M4;  ci = mk_c(cfg_n, alpha, 3'd0); end
        4'd4: begin tgt = T_M5; end
        4'd5: begin tgt = T_M6; end
        4'd6: begin tgt = T_M8; end
        default: tgt = T_NONE;
      endcase
      S_P3_ISSUE: case (step)
        4'd0: begin tgt = T_VR;  vi = mk_v(1'b1, 1'b1, cfg_base_r, cfg_n, QID_R_M4); end
        4'd1: begin tgt = T_VAP; vi = mk_v(1'b1, 1'b0, cfg_base_ap, cfg_n, QID_AP_M4); end
        4'd2: begin tgt = T_VM;  vi = mk_v(1'b1, 1'b0, cfg_base_m, cfg_n, QID_M_M5); end
        4'd3: begin tgt = T_VP;  vi = mk_v(1'b1, 1'b1, cfg_base_p, cfg_n, QID_P_M7); end
        4'd4: begin tgt = T_M4;  ci = mk_c(cfg_n, alpha, 3'd0); end
        4'd5: begin tgt = T_M5; end
        4'd6: begin tgt = T_M7;  ci = mk_c(cfg_n, beta, init ? 3'd0 : QID_CMP_FWD); end
        4'd7: if (!init) begin tgt = T_VX; vi = mk_v(1'b1, 1'b1, cfg_base_x, cfg_n, QID_X_M3); end
        4'd8: if (!init) begin tgt = T_M3; ci = mk_c(cfg_n, alpha, QID_CMP_FWD); end
        default: tgt = T_NONE;
      endcase
      S_FIN_ISSUE: case (step)
        4'd0: begin tgt = T_VP; vi = mk_v(1'b1, 1'b0, cfg_base_p, cfg_n, QID_P_M3); end
        4'd1: begin tgt = T_VX; vi = mk_v(1'b1, 1'b1, cfg_base_x, cfg_n, QID_X_M3); end
        4'd2: begin tgt = T_M3; ci = mk_c(cfg_n, alpha, 3'd0); end
        default: tgt = T_NONE;
      endcase
      default: tgt = T_NONE;
    endcase
  end

  wire issuing = (state == S_P1_ISSUE) || (state == S_P2_ISSUE) ||
                 (state == S_P3_ISSUE) || (state == S_FIN_ISSUE);
  // a step whose entry is empty (skipped at rp = -1) is passed over
  wire last_step = (state == S_P1_ISSUE) ? (step >= 4'd5) :
                   (state == S_P2_ISSUE) ? (step >= 4'd6) :
                   (state == S_P3_ISSUE) ? (step >= 4'd8) : (step >= 4'd2);

  assign vp_valid  = issuing && tgt == T_VP;
  assign vr_valid  = issuing && tgt == T_VR;
  assign vx_valid  = issuing && tgt == T_VX;
  assign vap_valid = issuing && tgt == T_VAP;
  assign vm_valid  = issuing && tgt == T_VM;
  assign rda_valid = issuing && tgt == T_RDA;
  assign vp_inst   = vi;
  assign vr_inst   = vi;
  assign vx_inst   = vi;
  assign vap_inst  = vi;
  assign vm_inst   = vi;
  assign cmp_inst  = ci;
  always_comb begin
    for (int m = 1; m <= 8; m++) cmp_valid[m] = issuing && (tgt == target_t'(int'(T_M1) + m - 1));
  end

  logic tgt_ready;
  always_comb begin
    case (tgt)
      T_VP:    tgt_ready = vp_ready;
      T_VR:    tgt_ready = vr_ready;
      T_VX:    tgt_ready = vx_ready;
      T_VAP:   tgt_ready = vap_ready;
      T_VM:    tgt_ready = vm_ready;
      T_RDA:   tgt_ready = rda_ready;
      T_M1:    tgt_ready = cmp_ready[1];
      T_M2:    tgt_ready = cmp_ready[2];
      T_M3:    tgt_ready = cmp_ready[3];
      T_M4:    tgt_ready = cmp_ready[4];
      T_M5:    tgt_ready = cmp_ready[5];
      T_M6:    tgt_ready = cmp_ready[6];
      T_M7:    tgt_ready = cmp_ready[7];
      T_M8:    tgt_ready = cmp_ready[8];
      default: tgt_ready = 1'b1;   // empty entry
    endcase
  end
  wire step_done = issuing && tgt_ready;

  // ---------------------------------------------------------------- scalars
  assign alpha_ready = (state == S_P1_WAIT) && !got_alpha;
  assign rz_ready    = (state == S_P2_WAIT) && !got_rz;
  assign rr_ready    = (state == S_P2_WAIT) && !got_rr;

  assign busy         = (state != S_IDLE);
  assign iterations   = iter;
  assign rr_final     = rr;
  assign m5_fsm_clear = (state == S_IDLE) && start;

  wire terminate = fp64_lt(rr, cfg_tau) || (iter == cfg_ite_max);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      init      <= 1'b1;
      iter      <= '0;
      done      <= 1'b0;
      alpha     <= FP64_ZERO;
      beta      <= FP64_ZERO;
      rz        <= FP64_ZERO;
      rz_new    <= FP64_ZERO;
      rr        <= FP64_ZERO;
      {got_alpha, got_rz, got_rr, got_ap, got_p, got_x, got_r} <= '0;
    end else begin
      if (resp_ap) got_ap <= 1'b1;
      if (resp_p)  got_p  <= 1'b1;
      if (resp_x)  got_x  <= 1'b1;
      if (resp_r)  got_r  <= 1'b1;
      if (alpha_valid && alpha_ready) begin alpha <= alpha_data; got_alpha <= 1'b1; end
      if (rz_valid && rz_ready)       begin rz_new <= rz_data;   got_rz <= 1'b1; end
      if (rr_valid && rr_ready)       begin rr <= rr_data;       got_rr <= 1'b1; end

      if (step_done) step <= step + 1'b1;

      case (state)
        S_IDLE: if (start) begin
          done  <= 1'b0;
          init  <= 1'b1;
          iter  <= '0;
          rz    <= FP64_ZERO;
          step  <= '0;
          {got_alpha, got_ap} <= '0;
          state <= S_P1_ISSUE;
        end
        S_P1_ISSUE: if (step_done && last_step) state <= S_P1_WAIT;
        S_P1_WAIT: if ((got_ap || resp_ap) && (init || got_alpha)) begin
          if (init) alpha <= FP64_ONE;
          step  <= '0;
          {got_rz, got_rr} <= '0;
          state <= S_P2_ISSUE;
        end
        S_P2_ISSUE: if (step_done && last_step) state <= S_P2_WAIT;
        S_P2_WAIT: if (got_rz && got_rr) state <= S_CHECK;
        S_CHECK: begin
          step <= '0;
          {got_p, got_x, got_r} <= '0;
          if (terminate) begin
            state <= init ? S_IDLE : S_FIN_ISSUE;
            if (init) done <= 1'b1;
          end else begin
            beta  <= init ? FP64_ZERO : fp64_div(rz_new, rz);
            state <= S_P3_ISSUE;
          end
        end
        S_P3_ISSUE: if (step_done && last_step) state <= S_P3_WAIT;
        S_P3_WAIT: if ((got_r || resp_r) && (got_p || resp_p) && (init || got_x || resp_x)) begin
          rz    <= rz_new;
          init  <= 1'b0;
          iter  <= iter + 1;
          step  <= '0;
          {got_alpha, got_ap} <= '0;
          state <= S_P1_ISSUE;
        end
        S_FIN_ISSUE: if (step_done && last_step) state <= S_FIN_WAIT;
        S_FIN_WAIT: if (got_x || resp_x) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
