// hbm_chan_model: behavioural model of one HBM pseudo-channel, for
// simulation only (kind: behavioural model; the accelerator uses the FPGA's
// hardened HBM stack, which is not part of the design).
//
// It serves the memory-channel protocol of the accelerator's memory modules:
//   req_valid/req_ready/req_addr  word-address read request
//   rsp_valid/rsp_ready/rsp_data  read data, returned in request order LAT
//                                 cycles after the request was accepted
//   wr_valid/wr_ready/wr_addr/wr_data  word write, done when accepted
// Up to QD reads may be in flight.  With STALL_PCT > 0 the model refuses
// requests and writes at random (pseudo-random with $urandom), so that the
// design sees memory back-pressure.  Addresses wrap at DEPTH.  The storage
// array mem is written directly by testbenches to preload data and read to
// check results; stall_cnt counts cycles in which a request or write waited.
module hbm_chan_model #(
  parameter int unsigned DW        = 64,
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned LAT       = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [31:0]   req_addr,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output logic [DW-1:0] rsp_data,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [31:0]   wr_addr,
  input  logic [DW-1:0] wr_data
);
  localparam int unsigned QD = LAT + 4;

  logic [DW-1:0] mem [DEPTH];

  logic [DW-1:0] q_data [QD];
  longint        q_due  [QD];
  int            q_wp, q_rp, q_n;
  longint        cyc;
  logic          rq_ok, wr_ok;
  int            stall_cnt;
  int            reads, writes;

  assign req_ready = rq_ok && (q_n < QD);
  assign wr_ready  = wr_ok;
  assign rsp_valid = (q_n > 0) && (q_due[q_rp] <= cyc);
  assign rsp_data  = q_data[q_rp];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < QD; i++) begin
      q_data[i] = '0;
      q_due[i]  = 0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_wp      <= 0;
      q_rp      <= 0;
      q_n       <= 0;
      cyc       <= 0;
      rq_ok     <= 1'b1;
      wr_ok     <= 1'b1;
      stall_cnt <= 0;
      reads     <= 0;
      writes    <= 0;
    end else begin
      automatic int n = q_n;
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        q_data[q_wp] <= mem[req_addr % DEPTH];
        q_due[q_wp]  <= cyc + longint'(LAT);
        q_wp         <= (q_wp + 1) % QD;
        n++;
        reads <= reads + 1;
      end
      if (rsp_valid && rsp_ready) begin
        q_rp <= (q_rp + 1) % QD;
        n--;
      end
      q_n <= n;
      if (wr_valid && wr_ready) begin
        mem[wr_addr % DEPTH] <= wr_data;
        writes <= writes + 1;
      end
      if ((req_valid && !req_ready) || (wr_valid && !wr_ready)) stall_cnt <= stall_cnt + 1;
      rq_ok <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
      wr_ok <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
    end
  end
endmodule
