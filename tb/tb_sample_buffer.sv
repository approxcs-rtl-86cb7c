// tb_sample_buffer - checks the sample window memory (256 x 36 bits).
//
// Every word is written with random data, then read back in a random order. The
// read data must appear exactly one cycle after the read and must hold while no
// read is issued, also across writes to the addressed word.
module tb_sample_buffer;

  localparam int DEPTH = 256;
  localparam int AW = 8;
  localparam int DW = 36;

  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sample_buffer dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .re(re), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [DW-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s addr=%0d got=%h exp=%h", what, raddr, rdata, exp);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1'b1; waddr = AW'(i); wdata = DW'({$urandom, $urandom});
      model[i] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    for (int n = 0; n < 2 * DEPTH; n++) begin
      int i;
      i = int'($urandom_range(DEPTH - 1));
      re = 1'b1; raddr = AW'(i);
      @(negedge clk);
      re = 1'b0;
      check(model[i], "read");
      // hold: overwrite the word just read, rdata must not follow
      we = 1'b1; waddr = AW'(i); wdata = ~model[i];
      @(negedge clk);
      we = 1'b0;
      check(model[i], "hold");
      model[i] = ~model[i];
      @(negedge clk);
      check(~model[i], "hold2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
