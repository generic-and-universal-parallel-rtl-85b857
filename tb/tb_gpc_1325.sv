// tb_gpc_1325 -- exhaustive test of the (1,3,2,5:1,1,1,1,1] counter: for
// all 2048 inputs y must equal sum(x0) + 2*sum(x1) + 4*sum(x2) + 8*x3.
module tb_gpc_1325;
  logic [4:0] x0;
  logic [1:0] x1;
  logic [2:0] x2;
  logic       x3;
  logic [4:0] y;
  int checks = 0, failures = 0;

  gpc_1325 dut (.x0(x0), .x1(x1), .x2(x2), .x3(x3), .y(y));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int e;
    for (int v = 0; v < 2048; v++) begin
      {x3, x2, x1, x0} = 11'(v);
      #1;
      e = 8*int'(x3);
      for (int i = 0; i < 5; i++) e += int'(x0[i]);
      for (int i = 0; i < 2; i++) e += 2*int'(x1[i]);
      for (int i = 0; i < 3; i++) e += 4*int'(x2[i]);
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL x=%b %b %b %b y=%0d expected %0d", x3, x2, x1, x0, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
