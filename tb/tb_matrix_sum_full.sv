// tb_matrix_sum_full -- the summation at its default configuration: a
// 128-bit population count, strength-ordered counters, no pipeline
// registers.  Applies all-zero, all-one, single-one and 2000 random vectors
// of varying density; the combinational result must equal the number of
// ones.
module tb_matrix_sum_full;
  logic         clk = 1'b0;
  logic [127:0] bits;
  logic [7:0]   sum;
  int checks = 0, failures = 0;

  matrix_sum dut (.clk(clk), .bits(bits), .sum(sum));

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n, dens;
    for (int v = 0; v < 2000 + 130; v++) begin
      if (v == 0)        bits = '0;
      else if (v == 1)   bits = '1;
      else if (v < 130)  bits = 128'(1) << (v - 2);
      else begin
        dens = $urandom_range(0, 16);
        for (int i = 0; i < 128; i++) bits[i] = ($urandom_range(0, 15) < dens);
      end
      #1;
      n = 0;
      for (int i = 0; i < 128; i++) n += int'(bits[i]);
      checks++;
      if (int'(sum) != n) begin
        failures++;
        if (failures < 10) $display("FAIL popcount %0d, got %0d", n, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
