// tb_slice_counter -- test of all nine atom combinations of the
// whole-slice counter.  Each instance gets every combination of the input
// bits it uses (up to 2^13) and must produce y = sum over columns of
// 2^i * (ones in column i); the columns' unused inputs are randomised.
// The input counts per column come from the counter's (p3,p2,p1,p0) name,
// worked out here from the atoms: a lower atom (w2,w1) contributes w1 + 1
// bits to column 0 (w1 for (0,6), which takes no carry input) and w2 to
// column 1; the upper atom w1 to column 2 and w2 to column 3.
module tb_slice_counter;
  import msum_pkg::*;
  localparam atom_e AT [3] = '{ATOM_22, ATOM_14, ATOM_06};
  localparam int    W1 [3] = '{2, 4, 6};
  localparam int    W2 [3] = '{2, 1, 0};

  logic [3:0][5:0] x [9];
  logic [4:0]      y [9];
  int checks = 0, failures = 0;

  for (genvar u = 0; u < 3; u++) begin : g_u
    for (genvar l = 0; l < 3; l++) begin : g_l
      slice_counter #(.UPPER(AT[u]), .LOWER(AT[l])) dut (.x(x[3*u+l]), .y(y[3*u+l]));
    end
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int p [4];
    int n, e, idx;
    for (int u = 0; u < 3; u++)
      for (int l = 0; l < 3; l++) begin
        p[0] = W1[l] + ((l == 2) ? 0 : 1);
        p[1] = W2[l];
        p[2] = W1[u];
        p[3] = W2[u];
        n = p[0] + p[1] + p[2] + p[3];
        for (int v = 0; v < (1 << n); v++) begin
          idx = 0;
          e = 0;
          for (int c = 0; c < 4; c++)
            for (int j = 0; j < 6; j++) begin
              if (j < p[c]) begin
                x[3*u+l][c][j] = v[idx];
                e += int'(v[idx]) << c;
                idx++;
              end else begin
                x[3*u+l][c][j] = 1'($urandom);
              end
            end
          #1;
          checks++;
          if (int'(y[3*u+l]) != e) begin
            failures++;
            if (failures < 10)
              $display("FAIL counter (%s,%s) x=%h y=%0d expected %0d", AT[u], AT[l], x[3*u+l], y[3*u+l], e);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
