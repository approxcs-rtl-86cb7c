// tb_ref_pkg - reference arithmetic for the testbenches.
//
// ref_add models a W-bit ripple-carry adder whose k low positions follow the
// truth tables sum_tt / cout_tt (bit {a,b,cin} of each table) and whose upper
// positions are exact, computed bit by bit with integer arithmetic rather than
// with the cell modules of the design.
package tb_ref_pkg;

  function automatic longint unsigned ref_add(input longint unsigned a, input longint unsigned b,
                                              input int w, input int k,
                                              input bit [7:0] sum_tt, input bit [7:0] cout_tt);
    longint unsigned s = 0;
    int c = 0;
    for (int i = 0; i < w; i++) begin
      int ai = int'((a >> i) & 1);
      int bi = int'((b >> i) & 1);
      int idx = ai * 4 + bi * 2 + c;
      int si, co;
      if (i < k) begin
        si = int'(sum_tt[idx]);
        co = int'(cout_tt[idx]);
      end else begin
        si = (ai + bi + c) % 2;
        co = (ai + bi + c) / 2;
      end
      s |= longint'(si) << i;
      c = co;
    end
    return s;
  endfunction

  function automatic longint unsigned mask(input int w);
    return (w >= 64) ? '1 : ((64'd1 << w) - 1);
  endfunction

endpackage
