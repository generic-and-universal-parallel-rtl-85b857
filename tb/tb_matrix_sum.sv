// tb_matrix_sum -- end-to-end test of the matrix summation.
//
// Six instances of matrix_sum with different matrix shapes (single tall
// column, two columns, multiplier partial products, an irregular matrix
// with empty columns), all three counter
// precedence metrics and different pipeline register placements are run
// through msum_harness, which compares every total with a reference sum.
// The testbench also inspects the schedules the instances were built from
// and counts how often each mechanism of the design occurs: every kind of
// counter, each element of the ragged carry-propagate adder (bit copy, full
// adder, ternary element), multi-stage compression and pipeline registers.
// A mechanism that never occurs counts as a failure.
module tb_matrix_sum;
  import msum_pkg::*;

  localparam int NI = 6;
  localparam hvec_t           H [NI] = '{hv1(128), hv2(40, 40), hv_mul(8), hv1(37), hv2(128, 128),
                                      hvec_t'({11'd9, 11'd0, 11'd0, 11'd20, 11'd3, 11'd0})};
  localparam metric_e         M [NI] = '{M_STRENGTH, M_EFFICIENCY, M_PRODUCT, M_EFFICIENCY, M_STRENGTH, M_PRODUCT};
  localparam logic [MAXS-1:0] P [NI] = '{'0, '1, 12'b01, '0, 12'b10, '1};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0] done;
  int ck [NI];
  int fl [NI];

  for (genvar i = 0; i < NI; i++) begin : g_inst
    msum_harness #(.HEIGHTS(H[i]), .METRIC(M[i]), .PIPE(P[i]), .NVEC(300)) u_h (
      .clk(clk), .done(done[i]), .checks(ck[i]), .failures(fl[i]));
  end

  int checks, failures, cycles;
  int kind_cnt [NCNT];
  int cpe_cnt [5];
  int multi_stage, piped;

  task automatic tally(sched_t s, logic [MAXS-1:0] pipe);
    hvec_t hf;
    for (int k = 0; k < NCNT; k++) kind_cnt[k] += count_kind(s, counter_e'(k));
    hf = s.height[s.nstages];
    for (int c = 0; c < int'(s.w); c++) cpe_cnt[cp_element(cp_carries(hf, c), int'(hf[c]))]++;
    if (s.nstages > 1) multi_stage++;
    for (int t = 0; t < int'(s.nstages); t++) if (pipe[t]) piped++;
  endtask

  initial begin
    checks = 0;
    failures = 0;
    multi_stage = 0;
    piped = 0;
    for (int k = 0; k < NCNT; k++) kind_cnt[k] = 0;
    for (int k = 0; k < 5; k++) cpe_cnt[k] = 0;
    tally(schedule(H[0], M[0]), P[0]);
    tally(schedule(H[1], M[1]), P[1]);
    tally(schedule(H[2], M[2]), P[2]);
    tally(schedule(H[3], M[3]), P[3]);
    tally(schedule(H[4], M[4]), P[4]);
    tally(schedule(H[5], M[5]), P[5]);
    @(posedge clk);
    wait (&done);
    for (int i = 0; i < NI; i++) begin
      checks += ck[i];
      failures += fl[i];
    end
    for (int k = 0; k < NCNT; k++) begin
      $display("counter %-9s placed %0d times", counter_e'(k), kind_cnt[k]);
    end
    $display("CPA elements: copy %0d, full adder %0d, ternary %0d", cpe_cnt[CPE_COPY], cpe_cnt[CPE_FA], cpe_cnt[CPE_TE]);
    $display("multi-stage instances %0d, registered stages %0d", multi_stage, piped);
    checks++; if (cpe_cnt[CPE_COPY] == 0) begin failures++; $display("FAIL: no bit copy element"); end
    checks++; if (cpe_cnt[CPE_FA] == 0)   begin failures++; $display("FAIL: no full adder element"); end
    checks++; if (cpe_cnt[CPE_TE] == 0)   begin failures++; $display("FAIL: no ternary element"); end
    checks++; if (cpe_cnt[CPE_NA] != 0)   begin failures++; $display("FAIL: unacceptable CPA column"); end
    checks++; if (multi_stage == 0)       begin failures++; $display("FAIL: no multi-stage compression"); end
    checks++; if (piped == 0)             begin failures++; $display("FAIL: no pipeline register"); end
    // counter classes: floating counters and whole-slice counters
    checks++;
    if (kind_cnt[C_FA] + kind_cnt[C_6_111] + kind_cnt[C_25_121] == 0) begin
      failures++; $display("FAIL: no floating counter placed");
    end
    checks++;
    if (kind_cnt[C_1325] + kind_cnt[C_S22_22] + kind_cnt[C_S22_14] + kind_cnt[C_S22_06] +
        kind_cnt[C_S14_22] + kind_cnt[C_S14_14] + kind_cnt[C_S14_06] +
        kind_cnt[C_S06_22] + kind_cnt[C_S06_14] + kind_cnt[C_S06_06] == 0) begin
      failures++; $display("FAIL: no whole-slice counter placed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cycles = 0;
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 5000) begin
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
        $finish;
      end
    end
  end
endmodule
