// tb_approx_adder - checks the approximate ripple-carry adder against a bit-level
// reference model.
//
// Instances: the default 36-bit adder with 14 approximate bits, the same width with
// no approximate bits (must equal a + b), and an 8-bit adder with 4 approximate
// bits that is checked over all 65536 operand pairs. The 36-bit ones get random
// operands plus corner cases.
module tb_approx_adder;
  import tb_ref_pkg::*;

  localparam int W = 36;
  localparam int K = 14;

  logic [W-1:0] a, b, s_def, s_ex;
  logic [7:0]   a8, b8, s8;
  int checks = 0, failures = 0;
  int approx_diff = 0;

  approx_adder u_def (.a(a), .b(b), .s(s_def));
  approx_adder #(.W(W), .APPROX_BITS(0)) u_ex (.a(a), .b(b), .s(s_ex));
  approx_adder #(.W(8), .APPROX_BITS(4)) u_8 (.a(a8), .b(b8), .s(s8));

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check36();
    longint unsigned e_def, e_ex;
    #1;
    e_def = ref_add(64'(a), 64'(b), W, K, 8'h17, 8'hE8);
    e_ex  = (64'(a) + 64'(b)) & mask(W);
    checks += 2;
    if (64'(s_def) != e_def) begin
      failures++;
      $display("FAIL default a=%h b=%h got=%h exp=%h", a, b, s_def, e_def);
    end
    if (64'(s_ex) != e_ex) begin
      failures++;
      $display("FAIL exact a=%h b=%h got=%h exp=%h", a, b, s_ex, e_ex);
    end
    if (s_def != s_ex) approx_diff++;
  endtask

  initial begin
    a = '0; b = '0; check36();
    a = '1; b = '1; check36();
    a = '1; b = 1;  check36();
    a = 36'h0_0000_3FFF; b = 36'h0_0000_0001; check36();
    a = 36'h0_0000_4000; b = 36'h0_0000_4000; check36();
    for (int i = 0; i < 2000; i++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      check36();
    end
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        longint unsigned e8;
        a8 = 8'(i); b8 = 8'(j);
        #1;
        e8 = ref_add(64'(i), 64'(j), 8, 4, 8'h17, 8'hE8);
        checks++;
        if (64'(s8) != e8) begin
          failures++;
          if (failures < 10) $display("FAIL w8 a=%h b=%h got=%h exp=%h", a8, b8, s8, e8);
        end
      end
    end
    // The approximation must actually change results for random operands.
    checks++;
    if (approx_diff == 0) begin
      failures++;
      $display("FAIL approximate adder never differed from the exact one");
    end
    $display("approximate results differing from exact: %0d", approx_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
