// cg_pkg: instruction formats, stream element formats and destination codes
// shared by the conjugate-gradient accelerator.
//
// The three instruction types of the stream-centric instruction set:
//   Type-I   inst_vctrl_t  vector control: {rd, wr, base_addr, len, q_id}
//   Type-II  inst_cmp_t    computation:    {len, alpha, q_id}
//   Type-III inst_rdwr_t   memory:         {rd, wr, base_addr, len}
// Field widths follow the published C structs (bool, int, double,
// ap_uint<3>).  Computation instructions carry no opcode: every computation
// module has exactly one function.  How each module reads q_id is this
// design's choice and is listed with the QID_* constants below.
package cg_pkg;

  typedef logic [63:0] fp64_t;

  typedef struct packed {
    logic        rd;
    logic        wr;
    logic [31:0] base_addr;
    logic [31:0] len;
    logic [2:0]  q_id;
  } inst_vctrl_t;

  typedef struct packed {
    logic [31:0] len;
    fp64_t       alpha;
    logic [2:0]  q_id;
  } inst_cmp_t;

  typedef struct packed {
    logic        rd;
    logic        wr;
    logic [31:0] base_addr;
    logic [31:0] len;
  } inst_rdwr_t;

  // One sparse non-zero as stored for the SpMV engines: 14-bit column index
  // (within the current column segment), 18-bit row index (local Y-memory
  // address of the owning PE) and an FP32 value.
  typedef struct packed {
    logic [13:0] col;
    logic [17:0] row;
    logic [31:0] val;
  } nz_t;

  localparam logic [17:0] NZ_ROW_PAD = 18'h3FFFF;  // lane carries no element
  localparam logic [13:0] NZ_COL_END = 14'h3FFF;   // with row pad in lane 0: end of segment

  // Destination codes (q_id) of the vector control modules.
  localparam logic [2:0] QID_P_M1 = 3'd0;
  localparam logic [2:0] QID_P_M2 = 3'd1;
  localparam logic [2:0] QID_P_M3 = 3'd2;
  localparam logic [2:0] QID_P_M7 = 3'd3;
  localparam logic [2:0] QID_R_M4 = 3'd0;
  localparam logic [2:0] QID_AP_M4 = 3'd0;
  localparam logic [2:0] QID_X_M3 = 3'd0;
  localparam logic [2:0] QID_M_M5 = 3'd0;

  // q_id bit 0 of computation instructions:
  //   M1: 1 = also stream ap to M2 (Phase-1.1 of a regular iteration)
  //   M3: 1 = take p from M7 (Phase-3), 0 = take p from memory (final step)
  //   M7: 1 = forward the consumed (old) p to M3
  localparam logic [2:0] QID_CMP_FWD = 3'd1;

endpackage
