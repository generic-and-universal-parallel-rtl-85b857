// tb_ragged_cpa -- test of the ragged carry-propagate adder.
//
// Three instances: the default shape (column heights 1,3,4,1,2,4,3,1 from
// column 0 up, whose elements must be copy, FA, TE, FA, FA, TE, TE, FA) and
// two shapes that exercise the remaining table entries (a TE taking four
// bits with no carry in, TEs taking two carries, copies of a carry, an FA
// adding only the two incoming carries).  Each instance gets random
// matrices plus all-zero and all-one matrices; its output must equal the
// weighted count of ones.  The element selected for every column of the
// default shape is checked against the expected sequence as well.
module tb_ragged_cpa;
  import msum_pkg::*;

  localparam hvec_t H0 = hvec_t'({11'd1, 11'd3, 11'd4, 11'd2, 11'd1, 11'd4, 11'd3, 11'd1});
  localparam hvec_t H1 = hvec_t'({11'd1, 11'd3, 11'd3, 11'd3, 11'd4});
  localparam hvec_t H2 = hvec_t'({11'd2, 11'd4, 11'd0, 11'd0, 11'd4, 11'd0, 11'd2});
  localparam int W0 = 9, W1 = 6, W2 = 9;
  localparam int N0 = total_bits(H0), N1 = total_bits(H1), N2 = total_bits(H2);

  logic [N0-1:0] b0; logic [W0-1:0] s0;
  logic [N1-1:0] b1; logic [W1-1:0] s1;
  logic [N2-1:0] b2; logic [W2-1:0] s2;
  int checks = 0, failures = 0;

  ragged_cpa #(.W(W0), .HEIGHTS(H0)) u0 (.bits(b0), .sum(s0));
  ragged_cpa #(.W(W1), .HEIGHTS(H1)) u1 (.bits(b1), .sum(s1));
  ragged_cpa #(.W(W2), .HEIGHTS(H2)) u2 (.bits(b2), .sum(s2));

  function automatic int ref_sum(hvec_t h, logic [63:0] v);
    int t, idx;
    t = 0; idx = 0;
    for (int c = 0; c < 16; c++)
      for (int j = 0; j < int'(h[c]); j++) begin
        t += int'(v[idx]) << c;
        idx++;
      end
    return t;
  endfunction

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    cpe_e exp0 [8] = '{CPE_COPY, CPE_FA, CPE_TE, CPE_FA, CPE_FA, CPE_TE, CPE_TE, CPE_FA};
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (cp_element(cp_carries(H0, c), int'(H0[c])) != exp0[c]) begin
        failures++;
        $display("FAIL column %0d element %s expected %s", c,
                 cp_element(cp_carries(H0, c), int'(H0[c])), exp0[c]);
      end
    end
    for (int n = 0; n < 20000; n++) begin
      if (n == 0)      begin b0 = '0; b1 = '0; b2 = '0; end
      else if (n == 1) begin b0 = '1; b1 = '1; b2 = '1; end
      else begin
        b0 = N0'({$urandom, $urandom});
        b1 = N1'({$urandom, $urandom});
        b2 = N2'({$urandom, $urandom});
      end
      #1;
      checks += 3;
      if (int'(s0) != ref_sum(H0, 64'(b0))) begin failures++; if (failures < 10) $display("FAIL shape0 %b: %0d", b0, s0); end
      if (int'(s1) != ref_sum(H1, 64'(b1))) begin failures++; if (failures < 10) $display("FAIL shape1 %b: %0d", b1, s1); end
      if (int'(s2) != ref_sum(H2, 64'(b2))) begin failures++; if (failures < 10) $display("FAIL shape2 %b: %0d", b2, s2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
