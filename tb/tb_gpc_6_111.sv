// tb_gpc_6_111 -- exhaustive test of the (6:1,1,1] counter: for all 64
// inputs the 3-bit output must equal the number of ones.
module tb_gpc_6_111;
  logic [5:0] x;
  logic [2:0] y;
  int checks = 0, failures = 0;

  gpc_6_111 dut (.x(x), .y(y));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n;
    for (int v = 0; v < 64; v++) begin
      x = 6'(v);
      #1;
      n = 0;
      for (int i = 0; i < 6; i++) n += int'(x[i]);
      checks++;
      if (int'(y) != n) begin
        failures++;
        $display("FAIL x=%b y=%0d expected %0d", x, y, n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
