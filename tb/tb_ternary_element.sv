// tb_ternary_element -- exhaustive test of one ternary-adder position: for
// all 32 combinations of a[2:0], z and c, s + 2*(cout + zout) must equal
// a0 + a1 + a2 + z + c, and zout must not depend on z (it is the carry of
// the LUT's full adder alone).
module tb_ternary_element;
  logic [2:0] a;
  logic z, c, s, cout, zout, zref;
  int checks = 0, failures = 0;

  ternary_element dut (.a(a), .z(z), .c(c), .s(s), .cout(cout), .zout(zout));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int e, r;
    for (int v = 0; v < 32; v++) begin
      {c, z, a} = 5'(v);
      #1;
      e = int'(a[0]) + int'(a[1]) + int'(a[2]) + int'(z) + int'(c);
      r = int'(s) + 2*(int'(cout) + int'(zout));
      checks++;
      if (r != e) begin
        failures++;
        $display("FAIL a=%b z=%b c=%b result %0d expected %0d", a, z, c, r, e);
      end
      zref = (a[0] & a[1]) | (a[0] & a[2]) | (a[1] & a[2]);
      checks++;
      if (zout != zref) begin
        failures++;
        $display("FAIL a=%b z=%b: zout=%b, expected the carry of a, %b", a, z, zout, zref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
