// tb_full_adder -- exhaustive test of the (3:1,1] counter: for all eight
// inputs, 2*c + s must equal the number of ones.
module tb_full_adder;
  logic [2:0] x;
  logic s, c;
  int checks = 0, failures = 0;

  full_adder dut (.x(x), .s(s), .c(c));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      x = 3'(v);
      #1;
      checks++;
      if (2*int'(c) + int'(s) != int'(x[0]) + int'(x[1]) + int'(x[2])) begin
        failures++;
        $display("FAIL x=%b s=%b c=%b", x, s, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
