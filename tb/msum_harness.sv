// msum_harness -- drives one matrix_sum instance with test matrices and
// checks every result against a reference total.
//
// Each clock a new matrix is applied: all zeros, all ones, then random
// matrices whose bit density changes from vector to vector (dense, sparse,
// half).  The reference is computed here, column by column, as the sum of
// popcount(column) * 2^c and delayed by the instance's pipeline latency
// (the number of PIPE bits set among its stages): a vector applied after
// clock edge n appears on the output after edge n + latency.  After NVEC vectors the
// harness raises `done`; `checks` and `failures` count compared results.
module msum_harness
  import msum_pkg::*;
#(
  parameter hvec_t           HEIGHTS = hv1(16),
  parameter metric_e         METRIC  = M_STRENGTH,
  parameter logic [MAXS-1:0] PIPE    = '0,
  parameter int              NVEC    = 200
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam sched_t S   = schedule(HEIGHTS, METRIC);
  localparam int     W   = int'(S.w);
  localparam int     NB  = total_bits(HEIGHTS);
  localparam int     NST = int'(S.nstages);

  function automatic int latency();
    int l;
    l = 0;
    for (int s = 0; s < MAXS; s++) if (s < NST && PIPE[s]) l++;
    return l;
  endfunction
  localparam int LAT = latency();
  // At the check after a clock edge the output holds the vector applied
  // D vectors before the most recent one.
  localparam int D   = (LAT == 0) ? 0 : LAT - 1;

  logic [NB-1:0]   bits;
  logic [W-1:0]    sum;
  longint unsigned expq [0:D];     // expected totals, [0] = most recent input
  int              nvec;

  matrix_sum #(.HEIGHTS(HEIGHTS), .METRIC(METRIC), .PIPE(PIPE)) dut (
    .clk(clk), .bits(bits), .sum(sum));

  function automatic longint unsigned reference(logic [NB-1:0] v);
    longint unsigned t;
    int idx;
    t = 0;
    idx = 0;
    for (int c = 0; c < MAXW; c++)
      for (int j = 0; j < int'(HEIGHTS[c]); j++) begin
        if (v[idx]) t += longint'(1) << c;
        idx++;
      end
    return t;
  endfunction

  function automatic logic [NB-1:0] stimulus(int n);
    logic [NB-1:0] v;
    int dens;
    if (n == 0) return '0;
    if (n == 1) return '1;
    dens = $urandom_range(0, 8);      // probability of a one: dens/8
    for (int i = 0; i < NB; i++) v[i] = ($urandom_range(0, 7) < dens);
    return v;
  endfunction

  initial begin
    checks = 0;
    failures = 0;
    done = 1'b0;
    nvec = 0;
    bits = stimulus(0);
    for (int i = 0; i <= D; i++) expq[i] = 0;
    expq[0] = reference(bits);
  end

  always @(posedge clk) begin
    if (!done) begin
      #1;
      if (nvec >= D) begin
        checks++;
        if (64'(sum) != expq[D]) begin
          failures++;
          if (failures < 5)
            $display("msum_harness: %m vector %0d sum %0d expected %0d", nvec - D, sum, expq[D]);
        end
      end
      for (int i = D; i > 0; i--) expq[i] = expq[i-1];
      nvec++;
      bits = stimulus(nvec);
      expq[0] = reference(bits);
      if (nvec >= NVEC + D) done = 1'b1;
    end
  end
endmodule
