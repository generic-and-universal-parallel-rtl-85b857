// tb_gpc_25_121 -- exhaustive test of the (2,5:1,2,1] counter: for all 128
// inputs s0 + 2*(c0 + s1) + 4*c1 must equal sum(a) + 2*sum(b).
module tb_gpc_25_121;
  logic [4:0] a;
  logic [1:0] b;
  logic s0, c0, s1, c1;
  int checks = 0, failures = 0;

  gpc_25_121 dut (.a(a), .b(b), .s0(s0), .c0(c0), .s1(s1), .c1(c1));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int e, r;
    for (int v = 0; v < 128; v++) begin
      {b, a} = 7'(v);
      #1;
      e = 2*(int'(b[0]) + int'(b[1]));
      for (int i = 0; i < 5; i++) e += int'(a[i]);
      r = int'(s0) + 2*(int'(c0) + int'(s1)) + 4*int'(c1);
      checks++;
      if (r != e) begin
        failures++;
        $display("FAIL a=%b b=%b result %0d expected %0d", a, b, r, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
