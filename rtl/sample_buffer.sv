// sample_buffer - window memory for the N input samples x[0..N-1].
//
// The sparse multiplier reads the samples back in the order given by the index
// vector z, which can point anywhere in the window. The whole window is therefore
// held here. The memory has one write port and one synchronous read port. rdata
// changes only in the cycle after a read with re = 1 and keeps its value otherwise.
// The paper gives the window length (256) and the fractional width. The port
// organisation and the read latency are this design's choices. The array has no
// reset. Every word is written before it is read.
module sample_buffer #(
  parameter int unsigned N      = approxcs_pkg::N_DEFAULT,
  parameter int unsigned DATA_W = approxcs_pkg::INT_BITS_DEFAULT + approxcs_pkg::FRAC_BITS_DEFAULT,
  localparam int unsigned AW    = $clog2(N)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
