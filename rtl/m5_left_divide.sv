// m5_left_divide (M5): z = M \ r, line 11 of the JPCG loop.
//
// M is the Jacobi preconditioner, the diagonal of A, so M \ r is an
// element-wise division z[i] = r[i] / M[i].  The divider is a LAT-stage
// pipeline (LAT = 33 as in the paper).  Each element of r is duplicated to
// the next consumer in the cycle it enters the pipeline, while its z appears
// LAT cycles later, so the r side is the "fast" output and z the "slow" one.
// The pipeline behaves like a high-level-synthesis loop pipeline: it moves as
// a whole and stops when its input is missing or when either output is
// blocked.  The FIFO on the fast r output must therefore hold at least LAT+1
// elements, or it fills before the first z leaves and the consumer, which
// needs r and z together, deadlocks with this module.
//
// Decentralized scheduling: a two-state FSM chooses where the outputs go.
//   state 0 (Phase-2): z -> M6, r -> M6
//   state 1 (Phase-3): z -> M7, r -> memory (the r vector controller)
// The FSM advances after each instruction and returns to state 0 on
// fsm_clear (given by the controller when a solve starts).
//
// Interface: inst (inst_cmp_t, len used); r_* (from M4) and m_* (from the M
// vector controller) FP64 inputs; z_m6_*, r_m6_*, z_m7_*, r_mem_* FP64
// outputs.  The division itself uses the combinational fp64_div at stage 0;
// the remaining stages are delay registers.
//
// Lint note: only the length field of the instruction is used; the lint tool
// reports the alpha and q_id bits as unused, which is intended.
//
// The r stream is forwarded unchanged to M6 and to the r memory module, so
// those two data outputs are wires from the r input.
module m5_left_divide
  import cg_pkg::*;
#(
  parameter int unsigned LAT = 33
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      fsm_clear,
  input  logic      inst_valid,
  output logic      inst_ready,
  input  inst_cmp_t inst,
  input  logic      r_valid,
  output logic      r_ready,
  input  fp64_t     r_data,
  input  logic      m_valid,
  output logic      m_ready,
  input  fp64_t     m_data,
  output logic      z_m6_valid,
  input  logic      z_m6_ready,
  output fp64_t     z_m6_data,
  output logic      r_m6_valid,
  input  logic      r_m6_ready,
  output fp64_t     r_m6_data,
  output logic      z_m7_valid,
  input  logic      z_m7_ready,
  output fp64_t     z_m7_data,
  output logic      r_mem_valid,
  input  logic      r_mem_ready,
  output fp64_t     r_mem_data,
  output logic      fsm_state
);
  typedef enum logic {ST_PHASE2 = 1'b0, ST_PHASE3 = 1'b1} m5_state_t;

  m5_state_t   state;
  logic        active;
  logic [31:0] remaining;
  logic        pv [LAT];
  fp64_t       pd [LAT];

  wire   want_in  = active && (remaining != 0);
  wire   z_valid  = pv[LAT-1];
  wire   z_ready  = (state == ST_PHASE2) ? z_m6_ready : z_m7_ready;
  wire   ro_ready = (state == ST_PHASE2) ? r_m6_ready : r_mem_ready;
  wire   in_ok    = r_valid && m_valid && ro_ready;
  // global advance of the loop pipeline
  wire   adv      = !(want_in && !in_ok) && !(z_valid && !z_ready);
  wire   take     = adv && want_in;
  logic  any_v;

  always_comb begin
    any_v = 1'b0;
    for (int i = 0; i < LAT; i++) any_v |= pv[i];
  end

  assign inst_ready  = !active;
  assign r_ready     = take;
  assign m_ready     = take;
  assign z_m6_valid  = (state == ST_PHASE2) && z_valid && adv;
  assign z_m7_valid  = (state == ST_PHASE3) && z_valid && adv;
  assign z_m6_data   = pd[LAT-1];
  assign z_m7_data   = pd[LAT-1];
  assign r_m6_valid  = (state == ST_PHASE2) && take;
  assign r_mem_valid = (state == ST_PHASE3) && take;
  assign r_m6_data   = r_data;
  assign r_mem_data  = r_data;
  assign fsm_state   = state;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_PHASE2;
      active    <= 1'b0;
      remaining <= '0;
      for (int i = 0; i < LAT; i++) begin
        pv[i] <= 1'b0;
        pd[i] <= '0;
      end
    end else begin
      if (inst_valid && inst_ready) begin
        active    <= 1'b1;
        remaining <= inst.len;
      end
      if (adv) begin
        pv[0] <= take;
        pd[0] <= fp64_pkg::fp64_div(r_data, m_data);
        for (int i = 1; i < LAT; i++) begin
          pv[i] <= pv[i-1];
          pd[i] <= pd[i-1];
        end
        if (take) remaining <= remaining - 1;
      end
      if (active && remaining == 0 && !any_v) begin
        active <= 1'b0;
        state  <= (state == ST_PHASE2) ? ST_PHASE3 : ST_PHASE2;
      end
      if (fsm_clear) state <= ST_PHASE2;
    end
  end
endmodule
