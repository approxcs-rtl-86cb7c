// sparse_multiplier - controller and accumulator of the linear transformation y = Phi x.
//
// The sensing matrix Phi has R ones per row. Multiplying it with the window x
// therefore reduces to summing, for every row m, the R samples x(z_{m,q}) whose
// positions are listed in the index vector z (the paper's "sparse multiplier"). No
// multiplier and no matrix are needed. The sum is formed by successive additions
// through approx_adder. The first sample of a row is loaded into the accumulator
// and every further sample is added with the approximate ripple-carry adder, so a
// row costs R-1 approximate additions.
//
// Schedule (this design's choice; the paper gives no timing): each term takes three
// cycles.
//   IDX  read z entry m*R+q from the index memory
//   SMP  read sample x(z) from the sample buffer
//   ACC  load or add the sample into the accumulator
// After the last term of a row the state OUT presents y_data with y_valid. It waits
// for y_ready, so a slow consumer stalls the computation. A frame takes M*R*3
// cycles plus one cycle per accepted measurement when y_ready is held high.
//
// Interface: a start pulse in IDLE begins a frame; busy is high from the cycle after
// start until the last measurement has been accepted. Both memories must have a
// one-cycle synchronous read whose output holds between reads. An assertion checks
// that the indices of each row arrive sorted and distinct, as z defines them. The sample address
// is the index memory's read data passed straight through (smp_raddr = idx_rdata),
// which saves a register. The hold assertion at the end uses rst_n as its disable
// condition. Lint tools may therefore report rst_n as used both synchronously and
// asynchronously; the logic itself resets asynchronously only.
module sparse_multiplier #(
  parameter int unsigned N           = approxcs_pkg::N_DEFAULT,
  parameter int unsigned M           = approxcs_pkg::M_DEFAULT,
  parameter int unsigned R           = approxcs_pkg::R_DEFAULT,
  parameter int unsigned DATA_W      = approxcs_pkg::INT_BITS_DEFAULT + approxcs_pkg::FRAC_BITS_DEFAULT,
  parameter int unsigned APPROX_BITS = approxcs_pkg::approx_bits(DATA_W, approxcs_pkg::APPROX_PCT_DEFAULT),
  parameter logic [7:0]  SUM_TT      = approxcs_pkg::LPAA_SUM_DEFAULT,
  parameter logic [7:0]  COUT_TT     = approxcs_pkg::LPAA_COUT_DEFAULT,
  localparam int unsigned ZW         = $clog2(M * R),
  localparam int unsigned XW         = $clog2(N),
  localparam int unsigned MW         = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned QW         = (R > 1) ? $clog2(R) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  // index memory read port
  output logic              idx_re,
  output logic [ZW-1:0]     idx_raddr,
  input  logic [XW-1:0]     idx_rdata,
  // sample buffer read port
  output logic              smp_re,
  output logic [XW-1:0]     smp_raddr,
  input  logic [DATA_W-1:0] smp_rdata,
  // measurement stream
  output logic              y_valid,
  input  logic              y_ready,
  output logic [DATA_W-1:0] y_data,
  output logic [MW-1:0]     y_row,
  output logic              y_last
);

  typedef enum logic [2:0] {S_IDLE, S_IDX, S_SMP, S_ACC, S_OUT} state_t;

  state_t            state;
  logic [MW-1:0]     row;
  logic [QW-1:0]     term;
  logic [DATA_W-1:0] acc;
  logic [DATA_W-1:0] acc_sum;

  approx_adder #(
    .W(DATA_W), .APPROX_BITS(APPROX_BITS), .SUM_TT(SUM_TT), .COUT_TT(COUT_TT)
  ) u_add (
    .a(acc), .b(smp_rdata), .s(acc_sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row   <= '0;
      term  <= '0;
      acc   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          row   <= '0;
          term  <= '0;
          state <= S_IDX;
        end
        S_IDX: state <= S_SMP;
        S_SMP: state <= S_ACC;
        S_ACC: begin
          acc <= (term == '0) ? smp_rdata : acc_sum;
          if (32'(term) == R - 1) begin
            state <= S_OUT;
          end else begin
            term  <= term + 1'b1;
            state <= S_IDX;
          end
        end
        S_OUT: if (y_ready) begin
          term <= '0;
          if (32'(row) == M - 1) begin
            state <= S_IDLE;
          end else begin
            row   <= row + 1'b1;
            state <= S_IDX;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    idx_re    = (state == S_IDX);
    idx_raddr = ZW'(32'(row) * R + 32'(term));
    smp_re    = (state == S_SMP);
    smp_raddr = idx_rdata;
    y_valid   = (state == S_OUT);
    y_data    = acc;
    y_row     = row;
    y_last    = (state == S_OUT) && (32'(row) == M - 1);
  end

  // A presented measurement stays stable until it is accepted.
  property p_y_hold;
    @(posedge clk) disable iff (!rst_n) (y_valid && !y_ready) |=> (y_valid && $stable(y_data) && $stable(y_row));
  endproperty
  a_y_hold: assert property (p_y_hold);

  // z lists the ones of a row sorted and distinct: each index read for a row is
  // larger than the one read for the previous term, three cycles earlier.
  property p_z_sorted;
    @(posedge clk) disable iff (!rst_n) (state == S_SMP && term != '0) |-> (idx_rdata > $past(idx_rdata, 3));
  endproperty
  a_z_sorted: assert property (p_z_sorted);

endmodule
