// tb_workloads -- the seven evaluated matrix shapes, built and simulated.
//
// Single-column population counts of 128, 256 and 512 bits, two-column
// matrices of 2x128, 2x256 and 2x512 bits, and the partial-product matrix
// of a 16x16-bit multiplier, each with strength-ordered counters and no
// pipeline registers.  msum_harness applies 150 matrices to each instance
// (all zeros, all ones, random densities) and compares with reference sums.
// For the multiplier shape a second check drives the matrix as an actual
// multiplier: bit j of column i+j is a[i] & b[j], and the total must equal
// a*b.
module tb_workloads;
  import msum_pkg::*;

  localparam int NI = 7;
  localparam hvec_t H [NI] = '{hv1(128), hv1(256), hv1(512), hv2(128, 128),
                               hv2(256, 256), hv2(512, 512), hv_mul(16)};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0] done;
  int ck [NI];
  int fl [NI];

  for (genvar i = 0; i < NI; i++) begin : g_inst
    msum_harness #(.HEIGHTS(H[i]), .METRIC(M_STRENGTH), .PIPE('0), .NVEC(150)) u_h (
      .clk(clk), .done(done[i]), .checks(ck[i]), .failures(fl[i]));
  end

  // 16x16 multiplier built from the summation
  localparam hvec_t HM = hv_mul(16);
  localparam int    NM = total_bits(HM);
  logic [15:0]   ma, mb;
  logic [NM-1:0] mbits;
  logic [31:0]   mprod;

  always_comb begin
    int idx;
    idx = 0;
    for (int c = 0; c < 31; c++)
      for (int i = 0; i < 16; i++)
        if (c - i >= 0 && c - i < 16) begin
          mbits[idx] = ma[i] & mb[c - i];
          idx++;
        end
  end

  matrix_sum #(.HEIGHTS(HM), .METRIC(M_STRENGTH)) u_mul (.clk(clk), .bits(mbits), .sum(mprod));

  int checks, failures, cycles;

  initial begin
    checks = 0;
    failures = 0;
    for (int n = 0; n < 500; n++) begin
      ma = (n == 0) ? 16'hffff : 16'($urandom);
      mb = (n == 0) ? 16'hffff : 16'($urandom);
      #1;
      checks++;
      if (mprod != 32'(ma) * 32'(mb)) begin
        failures++;
        if (failures < 10) $display("FAIL %0d * %0d = %0d, got %0d", ma, mb, 32'(ma) * 32'(mb), mprod);
      end
    end
    @(posedge clk);
    wait (&done);
    for (int i = 0; i < NI; i++) begin
      checks += ck[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cycles = 0;
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 2000) begin
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
        $finish;
      end
    end
  end
endmodule
