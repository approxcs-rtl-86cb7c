// tb_lpaa_cell - exhaustive check of the one-bit approximate full adder.
//
// Three instances: the default table (carry = majority, sum = NOT carry), the exact
// full adder tables and an arbitrary asymmetric table. All eight input combinations
// are applied to each. Expected values are written as boolean formulas or read
// from the table, bit {a,b,cin}.
module tb_lpaa_cell;

  logic a, b, cin;
  logic s_def, c_def, s_ex, c_ex, s_as, c_as;
  int checks = 0, failures = 0;

  localparam logic [7:0] AS_SUM  = 8'b0101_1100;
  localparam logic [7:0] AS_COUT = 8'b0011_0001;

  lpaa_cell u_def (.a(a), .b(b), .cin(cin), .sum(s_def), .cout(c_def));
  lpaa_cell #(.SUM_TT(8'h96), .COUT_TT(8'hE8)) u_ex (.a(a), .b(b), .cin(cin), .sum(s_ex), .cout(c_ex));
  lpaa_cell #(.SUM_TT(AS_SUM), .COUT_TT(AS_COUT)) u_as (.a(a), .b(b), .cin(cin), .sum(s_as), .cout(c_as));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%b b=%b cin=%b got=%b exp=%b", what, a, b, cin, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      logic maj;
      {a, b, cin} = 3'(i);
      #1;
      maj = (a & b) | (a & cin) | (b & cin);
      check(c_def, maj, "default cout");
      check(s_def, ~maj, "default sum");
      check(c_ex, maj, "exact cout");
      check(s_ex, a ^ b ^ cin, "exact sum");
      check(s_as, AS_SUM[i], "asym sum");
      check(c_as, AS_COUT[i], "asym cout");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
