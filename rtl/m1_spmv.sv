// m1_spmv (M1): mixed-precision sparse matrix-vector product ap = A * p,
// line 7 of the JPCG loop ("Mixed-V3": matrix values FP32, vectors FP64).
//
// Organisation: N_CH matrix channels (one per RdA reader) each feed
// PE_PER_CH processing engines (spmv_pe); a 512-bit channel word carries one
// 64-bit non-zero {col[63:50], row[49:32], fp32 val[31:0]} per PE.  Row r of
// A belongs to PE g = r mod NPE (NPE = N_CH * PE_PER_CH), that is channel
// g / PE_PER_CH, lane g mod PE_PER_CH, and lives at Y address r / NPE; the
// host stores that Y address in the row field.
//
// One SpMV instruction (len = number of rows = number of columns):
//   CLEAR   zero Y addresses 0 .. ceil(len/NPE)-1 in every PE;
//   for each column segment of XMEM_DEPTH columns:
//     LOADX    take the segment of p from the p stream, one element per
//              cycle, and write it into the X memory of every PE;
//     COMPUTE  every channel consumes words independently until it reads its
//              end-of-segment word (lane 0 = {col all ones, row all ones});
//              a lane whose row field is all ones is padding;
//   DRAIN   let the last products land in Y;
//   OUTPUT  stream ap in row order, one element per cycle, to memory and,
//           when q_id bit 0 is set, also to M2 (both must accept together).
// This matches the streaming order the rest of the solver relies on: ap is
// only produced after the whole of p has been consumed.
//
// The segment/padding markers and the row-to-PE mapping are this design's
// choices (the paper gives the 14/18/32-bit non-zero format, the X and Y
// depths and the PE count, not the host format).
//
// Lint note: the instruction's alpha field and the value half of the lane
// checked for the end marker are not used here; the lint tool reports those
// bits as unused, which is intended.
module m1_spmv
  import cg_pkg::*;
#(
  parameter int unsigned N_CH       = 16,
  parameter int unsigned PE_PER_CH  = 8,
  parameter int unsigned XMEM_DEPTH = 4096,
  parameter int unsigned YMEM_DEPTH = 24576
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      inst_valid,
  output logic                      inst_ready,
  input  inst_cmp_t                 inst,
  input  logic [N_CH-1:0]           a_valid,
  output logic [N_CH-1:0]           a_ready,
  input  logic [PE_PER_CH*64-1:0]   a_data [N_CH],
  input  logic                      p_valid,
  output logic                      p_ready,
  input  fp64_t                     p_data,
  output logic                      ap_mem_valid,
  input  logic                      ap_mem_ready,
  output fp64_t                     ap_mem_data,
  output logic                      ap_m2_valid,
  input  logic                      ap_m2_ready,
  output fp64_t                     ap_m2_data
);
  localparam int unsigned NPE = N_CH * PE_PER_CH;
  localparam int unsigned XAW = $clog2(XMEM_DEPTH);
  localparam int unsigned YAW = $clog2(YMEM_DEPTH);
  localparam int unsigned GW  = (NPE > 1) ? $clog2(NPE) : 1;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_LOADX, S_COMPUTE, S_DRAIN, S_OUTPUT} state_t;
  state_t state;

  logic [31:0]     len, seg_base, xleft, out_left;
  logic            to_m2;
  logic [XAW-1:0]  xaddr;
  logic [YAW-1:0]  clr_addr, clr_last, y_addr;
  logic [GW-1:0]   g;
  logic [N_CH-1:0] ch_done;
  logic [1:0]      drain;

  // per-PE signals
  logic            pe_nz_valid [NPE];
  nz_t             pe_nz       [NPE];
  fp64_t           pe_y        [NPE];
  logic [NPE-1:0]  pe_busy;

  assign inst_ready = (state == S_IDLE);
  assign p_ready    = (state == S_LOADX);
  wire   x_we       = p_valid && p_ready;

  // matrix words
  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      nz_t lane0;
      lane0      = a_data[c][63:0];
      a_ready[c] = (state == S_COMPUTE) && !ch_done[c];
      for (int l = 0; l < PE_PER_CH; l++) begin
        pe_nz[c*PE_PER_CH + l]       = a_data[c][l*64 +: 64];
        pe_nz_valid[c*PE_PER_CH + l] = a_valid[c] && a_ready[c]
                                       && !(lane0.col == NZ_COL_END && lane0.row == NZ_ROW_PAD)
                                       && (a_data[c][l*64+32 +: 18] != NZ_ROW_PAD);
      end
    end
  end

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    spmv_pe #(.XMEM_DEPTH(XMEM_DEPTH), .YMEM_DEPTH(YMEM_DEPTH)) u_pe (
      .clk, .rst_n,
      .x_we, .x_waddr(xaddr), .x_wdata(p_data),
      .nz_valid(pe_nz_valid[i]), .nz(pe_nz[i]),
      .y_clr(state == S_CLEAR), .y_clr_addr(clr_addr),
      .y_raddr(y_addr), .y_rdata(pe_y[i]),
      .busy(pe_busy[i]));
  end

  // result stream
  wire   out_go = (state == S_OUTPUT) && ap_mem_ready && (ap_m2_ready || !to_m2);
  assign ap_mem_valid = (state == S_OUTPUT) && (ap_m2_ready || !to_m2);
  assign ap_m2_valid  = (state == S_OUTPUT) && to_m2 && ap_mem_ready;
  assign ap_mem_data  = pe_y[g];
  assign ap_m2_data   = pe_y[g];

  // channels that reach their end-of-segment word in this cycle
  logic [N_CH-1:0] ch_end;
  always_comb begin
    for (int c = 0; c < N_CH; c++)
      ch_end[c] = a_valid[c] && a_ready[c] && (a_data[c][63:50] == NZ_COL_END)
                  && (a_data[c][49:32] == NZ_ROW_PAD);
  end

  function automatic logic [31:0] seg_len(input logic [31:0] n, input logic [31:0] base);
    return ((n - base) > 32'(XMEM_DEPTH)) ? 32'(XMEM_DEPTH) : (n - base);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      len      <= '0;
      seg_base <= '0;
      xleft    <= '0;
      out_left <= '0;
      to_m2    <= 1'b0;
      xaddr    <= '0;
      clr_addr <= '0;
      clr_last <= '0;
      y_addr   <= '0;
      g        <= '0;
      ch_done  <= '0;
      drain    <= '0;
    end else begin
      case (state)
        S_IDLE: if (inst_valid) begin
          len      <= inst.len;
          to_m2    <= inst.q_id[0];
          clr_addr <= '0;
          clr_last <= YAW'((inst.len + 32'(NPE) - 1) / 32'(NPE) - 1);
          state    <= (inst.len == 0) ? S_IDLE : S_CLEAR;
        end
        S_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == clr_last) begin
            seg_base <= '0;
            xaddr    <= '0;
            xleft    <= seg_len(len, 32'd0);
            state    <= S_LOADX;
          end
        end
        S_LOADX: if (x_we) begin
          xaddr <= xaddr + 1'b1;
          xleft <= xleft - 1;
          if (xleft == 1) begin
            ch_done <= '0;
            state   <= S_COMPUTE;
          end
        end
        S_COMPUTE: begin
          ch_done <= ch_done | ch_end;
          if ((ch_done | ch_end) == '1) begin
            if (seg_base + 32'(XMEM_DEPTH) >= len) begin
              drain <= 2'd2;
              state <= S_DRAIN;
            end else begin
              seg_base <= seg_base + 32'(XMEM_DEPTH);
              xaddr    <= '0;
              xleft    <= seg_len(len, seg_base + 32'(XMEM_DEPTH));
              state    <= S_LOADX;
            end
          end
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 0 && pe_busy == '0) begin
            y_addr   <= '0;
            g        <= '0;
            out_left <= len;
            state    <= S_OUTPUT;
          end
        end
        S_OUTPUT: if (out_go) begin
          out_left <= out_left - 1;
          if (g == GW'(NPE - 1)) begin
            g      <= '0;
            y_addr <= y_addr + 1'b1;
          end else g <= g + 1'b1;
          if (out_left == 1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
