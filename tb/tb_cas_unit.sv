// tb_cas_unit: exhaustive check of the full and both half compare-and-swap
// units. The larger bit (OR) must appear on `hi`, the smaller (AND) on `lo`;
// a half unit must compute only its kept output and hold the other at 0.
module tb_cas_unit;
  import catwalk_pkg::*;
  logic a, b;
  logic f_lo, f_hi, h_lo, h_hi, l_lo, l_hi;
  int checks = 0, failures = 0;

  cas_unit #(.KIND(CAS_FULL))    u_full (.a, .b, .lo(f_lo), .hi(f_hi));
  cas_unit #(.KIND(CAS_HALF_HI)) u_hhi  (.a, .b, .lo(h_lo), .hi(h_hi));
  cas_unit #(.KIND(CAS_HALF_LO)) u_hlo  (.a, .b, .lo(l_lo), .hi(l_hi));

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b got=%0b exp=%0b", what, a, b, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      // reference: sort the two bits, larger one to the lower wire
      check("full.hi", f_hi, (a > b) ? a : b);
      check("full.lo", f_lo, (a > b) ? b : a);
      check("half_hi.hi", h_hi, (a > b) ? a : b);
      check("half_hi.lo", h_lo, 1'b0);
      check("half_lo.lo", l_lo, (a > b) ? b : a);
      check("half_lo.hi", l_hi, 1'b0);
      // a sorter never changes the number of ones
      check("full.ones", 1'(int'(f_hi) + int'(f_lo) == int'(a) + int'(b)), 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
