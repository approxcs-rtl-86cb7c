// approxcs_top - near-sensor approximate Bernoulli compressed-sensing acquisition.
//
// The unit compresses a stream of normalized ECG samples window by window. It
// captures N samples, then produces M measurements y_m. Each y_m is the sum of the R
// samples selected by row m of a sparse Bernoulli sensing matrix. The sums are formed
// with a ripple-carry adder whose APPROX_PCT % least significant bits are one-bit
// low-power approximate adders (LPAA). This trades a small error in y for lower
// energy. The receiver, which reconstructs the signal, is not part of this design.
//
// Data format: two's complement fixed point, INT_BITS integer bits (sign included)
// and FRAC_BITS fractional bits. The paper's configuration is followed for N = 256,
// M = 128, R = 2, FRAC_BITS = 33 and 40 % approximation. INT_BITS = 3 is this
// design's choice: it is enough for the sum of two samples in [-1, 1).
//
// Operation
//   1. Load z: write the R column indices of every row (entry m*R+q) through cfg_*.
//      Writes are ignored while cfg_ready is low (a window is being computed).
//   2. Stream N samples in with x_valid / x_ready. The N-th accepted sample starts
//      the computation. x_ready stays low until the last measurement of the window
//      has been accepted. The unit has one window buffer, not two.
//   3. Measurements leave in row order on y_valid / y_ready with y_row and y_last.
//      y_ready low stalls the computation.
// With y_ready held high, the last measurement is accepted 1 + M*(3R+1) cycles
// after the last sample (897 at the defaults). With one sample per cycle, a window
// takes about N + 897 = 1153 cycles.
module approxcs_top
  import approxcs_pkg::*;
#(
  parameter int unsigned N          = N_DEFAULT,
  parameter int unsigned M          = M_DEFAULT,
  parameter int unsigned R          = R_DEFAULT,
  parameter int unsigned FRAC_BITS  = FRAC_BITS_DEFAULT,
  parameter int unsigned INT_BITS   = INT_BITS_DEFAULT,
  parameter int unsigned APPROX_PCT = APPROX_PCT_DEFAULT,
  parameter logic [7:0]  SUM_TT     = LPAA_SUM_DEFAULT,
  parameter logic [7:0]  COUT_TT    = LPAA_COUT_DEFAULT,
  localparam int unsigned DATA_W    = INT_BITS + FRAC_BITS,
  localparam int unsigned ZW        = $clog2(M * R),
  localparam int unsigned XW        = $clog2(N),
  localparam int unsigned MW        = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // z (index vector) configuration
  input  logic              cfg_we,
  input  logic [ZW-1:0]     cfg_addr,
  input  logic [XW-1:0]     cfg_idx,
  output logic              cfg_ready,
  // input samples from the sensor front end
  input  logic              x_valid,
  output logic              x_ready,
  input  logic [DATA_W-1:0] x_data,
  // measurements to the transmitter
  output logic              y_valid,
  input  logic              y_ready,
  output logic [DATA_W-1:0] y_data,
  output logic [MW-1:0]     y_row,
  output logic              y_last
);

  localparam int unsigned APPROX_BITS = approx_bits(DATA_W, APPROX_PCT);

  logic          busy;
  logic          start;
  logic [XW-1:0] wr_ptr;
  logic          x_fire;

  logic          idx_re, smp_re;
  logic [ZW-1:0] idx_raddr;
  logic [XW-1:0] idx_rdata, smp_raddr;
  logic [DATA_W-1:0] smp_rdata;

  assign x_ready   = !busy && !start;
  assign cfg_ready = !busy && !start;
  assign x_fire    = x_valid && x_ready;

  // Capture pointer; the last sample of a window issues a one-cycle start.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      start  <= 1'b0;
    end else begin
      start <= 1'b0;
      if (x_fire) begin
        if (32'(wr_ptr) == N - 1) begin
          wr_ptr <= '0;
          start  <= 1'b1;
        end else begin
          wr_ptr <= wr_ptr + 1'b1;
        end
      end
    end
  end

  sample_buffer #(.N(N), .DATA_W(DATA_W)) u_xbuf (
    .clk(clk), .we(x_fire), .waddr(wr_ptr), .wdata(x_data),
    .re(smp_re), .raddr(smp_raddr), .rdata(smp_rdata)
  );

  index_memory #(.M(M), .R(R), .N(N)) u_zmem (
    .clk(clk), .we(cfg_we && cfg_ready), .waddr(cfg_addr), .wdata(cfg_idx),
    .re(idx_re), .raddr(idx_raddr), .rdata(idx_rdata)
  );

  sparse_multiplier #(
    .N(N), .M(M), .R(R), .DATA_W(DATA_W), .APPROX_BITS(APPROX_BITS),
    .SUM_TT(SUM_TT), .COUT_TT(COUT_TT)
  ) u_smul (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy),
    .idx_re(idx_re), .idx_raddr(idx_raddr), .idx_rdata(idx_rdata),
    .smp_re(smp_re), .smp_raddr(smp_raddr), .smp_rdata(smp_rdata),
    .y_valid(y_valid), .y_ready(y_ready), .y_data(y_data), .y_row(y_row), .y_last(y_last)
  );

endmodule
