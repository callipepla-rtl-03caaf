// dot_acc: two-phase FP64 dot-product engine shared by M2, M6 and M8.
//
// Phase I takes one pair (a, b) per cycle (II=1).  The product a*b is added
// into entry (k mod L) of an L-entry cyclic delay buffer, where k counts the
// pairs.  The adder result is written back ADD_LAT cycles later; because
// consecutive pairs use different entries and L > ADD_LAT, a buffer entry is
// never read while its previous sum is still in flight.  Phase II folds the
// L buffer entries into one sum, one addition every ADD_LAT+1 cycles because
// each addition needs the previous result (read-after-write).  Phase II thus
// costs (ADD_LAT+1)*L cycles whatever the vector length; with ADD_LAT=4 this
// is the 5*L of the paper's description.
//
// Interface: start/len begin a dot product (accepted when busy is low);
// in_valid/in_ready/in_a/in_b deliver pairs; res_valid/res_ready/res_data
// return the sum.  The multiplier is combinational in the issue stage; the
// delay-buffer size L and the adder latency are this design's choices (the
// paper gives the scheme and the II values, not the sizes).
module dot_acc #(
  parameter int unsigned L       = 8,
  parameter int unsigned ADD_LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] len,
  output logic        busy,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_a,
  input  logic [63:0] in_b,
  output logic        res_valid,
  input  logic        res_ready,
  output logic [63:0] res_data
);
  import fp64_pkg::*;

  localparam int unsigned IW = (L > 1) ? $clog2(L) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PH1, S_DRAIN, S_PH2, S_DONE} state_t;
  state_t state;

  fp64_t             dbuf [L];
  logic [31:0]       remaining;
  logic [IW-1:0]     idx;
  // write-back delay line of the Phase I adder
  logic [ADD_LAT-1:0] wb_v;
  logic [IW-1:0]      wb_idx [ADD_LAT];
  fp64_t              wb_val [ADD_LAT];
  logic [7:0]         wait_cnt;
  logic [IW:0]        fold_i;
  fp64_t              acc;

  assign busy      = (state != S_IDLE);
  assign in_ready  = (state == S_PH1) && (remaining != 0);
  assign res_valid = (state == S_DONE);
  assign res_data  = acc;

  wire   accept = in_valid && in_ready;
  fp64_t issue_sum;
  assign issue_sum = fp64_add(dbuf[idx], fp64_mul(in_a, in_b));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
      idx       <= '0;
      wb_v      <= '0;
      wait_cnt  <= '0;
      fold_i    <= '0;
      acc       <= FP64_ZERO;
      for (int i = 0; i < L; i++) dbuf[i] <= FP64_ZERO;
    end else begin
      // Phase I adder pipeline: shift, then retire the oldest entry.
      wb_v[0]   <= accept;
      wb_idx[0] <= idx;
      wb_val[0] <= issue_sum;
      for (int s = 1; s < ADD_LAT; s++) begin
        wb_v[s]   <= wb_v[s-1];
        wb_idx[s] <= wb_idx[s-1];
        wb_val[s] <= wb_val[s-1];
      end
      if (wb_v[ADD_LAT-1]) dbuf[wb_idx[ADD_LAT-1]] <= wb_val[ADD_LAT-1];

      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < L; i++) dbuf[i] <= FP64_ZERO;
          remaining <= len;
          idx       <= '0;
          acc       <= FP64_ZERO;
          state     <= S_PH1;
        end
        S_PH1: begin
          if (accept) begin
            remaining <= remaining - 1;
            idx       <= (idx == IW'(L - 1)) ? '0 : idx + 1'b1;
          end
          if (remaining == 0 || (accept && remaining == 1)) begin
            state    <= S_DRAIN;
            wait_cnt <= 8'(ADD_LAT);
          end
        end
        S_DRAIN: begin
          if (wait_cnt == 0) begin
            state    <= S_PH2;
            fold_i   <= '0;
            wait_cnt <= 8'(ADD_LAT);
          end else wait_cnt <= wait_cnt - 1'b1;
        end
        S_PH2: begin
          // one addition issued every ADD_LAT+1 cycles
          if (wait_cnt == 0) begin
            acc      <= fp64_add(acc, dbuf[fold_i[IW-1:0]]);
            wait_cnt <= 8'(ADD_LAT);
            if (fold_i == (IW+1)'(L - 1)) state <= S_DONE;
            else fold_i <= fold_i + 1'b1;
          end else wait_cnt <= wait_cnt - 1'b1;
        end
        S_DONE: if (res_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
