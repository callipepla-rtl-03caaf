// spmv_pe: one mixed-precision processing engine of the SpMV module M1.
//
// Each PE holds an X memory (FP64 copy of the current column segment of the
// input vector, XMEM_DEPTH entries) and a Y memory (FP64 partial sums of the
// rows this PE owns, YMEM_DEPTH entries).  A non-zero {col, row, FP32 value}
// flows through two stages:
//   stage 1: widen the FP32 value to FP64, read X[col], multiply;
//   stage 2: Y[row] = Y[row] + product (read, add and write in one cycle).
// Because the accumulation reads and writes Y in the same cycle, two
// non-zeros of the same row may follow each other back to back.
//
// Ports: x_we/x_waddr/x_wdata broadcast writes of the X memory; nz_valid/nz
// one non-zero per cycle (no back-pressure); y_clr/y_clr_addr zero one Y
// entry; y_raddr/y_rdata combinational Y read for the result stream; busy is
// high while a non-zero is still in the pipeline.  The column index selects
// X[col mod XMEM_DEPTH] and the row index Y[row mod YMEM_DEPTH].
module spmv_pe
  import cg_pkg::*;
#(
  parameter int unsigned XMEM_DEPTH = 4096,
  parameter int unsigned YMEM_DEPTH = 24576
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          x_we,
  input  logic [$clog2(XMEM_DEPTH)-1:0] x_waddr,
  input  fp64_t                         x_wdata,
  input  logic                          nz_valid,
  input  nz_t                           nz,
  input  logic                          y_clr,
  input  logic [$clog2(YMEM_DEPTH)-1:0] y_clr_addr,
  input  logic [$clog2(YMEM_DEPTH)-1:0] y_raddr,
  output fp64_t                         y_rdata,
  output logic                          busy
);
  import fp64_pkg::FP64_ZERO;
  import fp64_pkg::fp32_to_fp64;
  import fp64_pkg::fp64_add;
  import fp64_pkg::fp64_mul;

  localparam int unsigned XAW = $clog2(XMEM_DEPTH);
  localparam int unsigned YAW = $clog2(YMEM_DEPTH);

  fp64_t xmem [XMEM_DEPTH];
  fp64_t ymem [YMEM_DEPTH];

  logic           s1_valid;
  logic [YAW-1:0] s1_row;
  fp64_t          s1_prod;

  wire [XAW-1:0] xa = XAW'(nz.col);
  wire [YAW-1:0] ya = YAW'(nz.row % 18'(YMEM_DEPTH));

  assign y_rdata = ymem[y_raddr];
  assign busy    = s1_valid;

  always_ff @(posedge clk) begin
    if (x_we) xmem[x_waddr] <= x_wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_row   <= '0;
      s1_prod  <= '0;
    end else begin
      s1_valid <= nz_valid;
      s1_row   <= ya;
      s1_prod  <= fp64_mul(fp32_to_fp64(nz.val), xmem[xa]);
    end
  end

  always_ff @(posedge clk) begin
    if (y_clr) ymem[y_clr_addr] <= FP64_ZERO;
    else if (s1_valid) ymem[s1_row] <= fp64_add(ymem[s1_row], s1_prod);
  end
endmodule
