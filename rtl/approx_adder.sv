// approx_adder - W-bit ripple-carry adder with approximate low-order positions.
//
// The adder is a chain of one-bit full adders with carry-in 0 at bit 0. The
// APPROX_BITS least significant positions are lpaa_cell instances with the
// truth tables SUM_TT / COUT_TT. The remaining positions are exact full adders. This
// matches the paper's construction: one-bit LPAAs rippled into a multi-bit adder,
// with a chosen percentage of the total bits approximated. Choosing the low-order
// bits as the approximate ones, and dropping the final carry (two's-complement
// wrap), are this design's assumptions.
//
// Interface: a + b -> s, all W bits wide, combinational.
module approx_adder #(
  parameter int unsigned W           = approxcs_pkg::INT_BITS_DEFAULT + approxcs_pkg::FRAC_BITS_DEFAULT,
  parameter int unsigned APPROX_BITS = approxcs_pkg::approx_bits(W, approxcs_pkg::APPROX_PCT_DEFAULT),
  parameter logic [7:0]  SUM_TT      = approxcs_pkg::LPAA_SUM_DEFAULT,
  parameter logic [7:0]  COUT_TT     = approxcs_pkg::LPAA_COUT_DEFAULT
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s
);

  logic [W:0] c;
  assign c[0] = 1'b0;

  for (genvar i = 0; i < W; i++) begin : g_bit
    if (i < APPROX_BITS) begin : g_apx
      lpaa_cell #(.SUM_TT(SUM_TT), .COUT_TT(COUT_TT)) u_fa (
        .a(a[i]), .b(b[i]), .cin(c[i]), .sum(s[i]), .cout(c[i+1])
      );
    end else begin : g_exact
      lpaa_cell #(.SUM_TT(approxcs_pkg::FA_SUM_EXACT), .COUT_TT(approxcs_pkg::FA_COUT_EXACT)) u_fa (
        .a(a[i]), .b(b[i]), .cin(c[i]), .sum(s[i]), .cout(c[i+1])
      );
    end
  end

endmodule
