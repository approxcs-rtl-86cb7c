// index_memory - storage for the sorted location vector z of the sensing matrix.
//
// The Bernoulli sensing matrix (M rows, N columns) has R ones per row. It is never
// built. Only the column positions of its ones are kept: entry m*R + q is the column
// of the q-th one of row m, and the entries of a row are sorted in increasing order.
// The paper stores z so that the sensing matrix is not generated on board. How z is
// loaded is not described. Here it is written through a simple write port before
// acquisition starts. The read port is synchronous: rdata holds its value until the
// next read with re = 1. The array has no reset.
module index_memory #(
  parameter int unsigned M  = approxcs_pkg::M_DEFAULT,
  parameter int unsigned R  = approxcs_pkg::R_DEFAULT,
  parameter int unsigned N  = approxcs_pkg::N_DEFAULT,
  localparam int unsigned AW = $clog2(M * R),
  localparam int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [IW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [IW-1:0] rdata
);

  logic [IW-1:0] mem [M * R];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
