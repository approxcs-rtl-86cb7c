// lpaa_cell - one-bit low-power approximate full adder (LPAA).
//
// The accumulator of the acquisition unit is a ripple-carry chain. Its low-order
// positions use approximate full adders, and this cell is one of those positions.
// The cell is a lookup of its two outputs in 8-entry truth tables. Each table is
// indexed by the input combination {a, b, cin}. Any of the published one-bit
// approximate adders (or the exact full adder) is therefore obtained by setting
// SUM_TT and COUT_TT. The paper evaluates seven such cells but prints their tables in
// a figure that is not part of its text. The default here is an illustrative choice:
// the carry-out is exact (majority) and sum = NOT carry-out, which is wrong only for
// inputs 000 and 111. It keeps the carry chain intact, which the paper names as the
// property that avoids large errors.
//
// Purely combinational; no clock.
module lpaa_cell #(
  parameter logic [7:0] SUM_TT  = approxcs_pkg::LPAA_SUM_DEFAULT,
  parameter logic [7:0] COUT_TT = approxcs_pkg::LPAA_COUT_DEFAULT
) (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  logic [2:0] sel;

  always_comb begin
    sel  = {a, b, cin};
    sum  = SUM_TT[sel];
    cout = COUT_TT[sel];
  end

endmodule
