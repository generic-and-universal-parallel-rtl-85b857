// matrix_sum -- generic and universal parallel matrix summation.
//
// Computes the arithmetic total of a bit matrix given only by its column
// heights: HEIGHTS[c] bits of weight 2^c.  A single tall column is a
// population count, two columns a weighted count, the skewed shape of
// partial products a multiplier; the module is the same for all of them.
//
// How it works.  At elaboration msum_pkg::schedule() builds the compressor:
// stage after stage it places generalized parallel counters greedily,
// preferred counters first (ordered by METRIC: efficiency, strength or their
// product, slack breaking ties), from the lowest column that the final adder
// cannot yet take (the anchor) upwards, until every column fits the ragged
// carry-propagate adder.  This module turns the resulting record into
// hardware with for-generate: in each stage every counter takes its input
// bits from the lowest unconsumed positions of its columns, the untouched
// bits pass straight through, and the counter outputs are appended above
// them in the next stage's columns.  The last stage feeds ragged_cpa.
//
// Interface: `bits` holds the matrix column by column (column 0 first,
// HEIGHTS[0] bits, then column 1 ...), `sum` the total, W bits wide where W
// is the width of the largest possible total.
//
// Timing: combinational from `bits` to `sum` when PIPE = 0.  Bit s of PIPE
// places a register bank behind compression stage s (the designer chooses
// the stages, as in the paper); the latency is then the number of set bits
// of PIPE among the NSTAGES stages, and a new matrix is accepted every clock.
// The registers have no reset; the output is valid LATENCY cycles after the
// input.  The default shape is a 128-bit population count.
module matrix_sum
  import msum_pkg::*;
#(
  parameter hvec_t         HEIGHTS = hv1(128),        // column heights
  parameter metric_e       METRIC  = M_STRENGTH,      // counter precedence
  parameter logic [MAXS-1:0] PIPE  = '0,              // registers after stage s
  localparam sched_t       S       = schedule(HEIGHTS, METRIC),
  localparam int           W       = int'(S.w),
  localparam int           NB      = total_bits(HEIGHTS),
  localparam int           NSTAGES = int'(S.nstages)
) (
  input  logic          clk,    // used only by the pipeline registers
  input  logic [NB-1:0] bits,   // the matrix, column by column
  output logic [W-1:0]  sum     // total
);
  // widest stage, for the stage vectors below
  function automatic int max_bits();
    int m;
    m = 1;
    for (int s = 0; s <= MAXS; s++)
      if (s <= NSTAGES && total_bits(S.height[s]) > m) m = total_bits(S.height[s]);
    return m;
  endfunction
  localparam int NBMAX = max_bits();

  if (!S.ok) begin : g_bad
    $error("matrix_sum: construction exceeds the limits of msum_pkg (%0d stages, %0d counters)",
           NSTAGES, int'(S.first[NSTAGES]));
  end

  // m[s]: bits at the input of stage s; m[NSTAGES] feeds the final adder
  logic [NSTAGES:0][NBMAX-1:0] m;
  assign m[0] = NBMAX'(bits);

  for (genvar s = 0; s < NSTAGES; s++) begin : g_stage
    localparam hvec_t HI   = S.height[s];
    localparam hvec_t HO   = S.height[s+1];
    localparam int    NBO  = total_bits(HO);
    logic [NBMAX-1:0] nxt;   // combinational result of this stage

    // bits no counter consumed pass to the bottom of their column
    for (genvar c = 0; c < W; c++) begin : g_pass
      localparam int U  = int'(S.used[s][c]);
      localparam int R  = int'(HI[c]) - U;
      localparam int OI = col_offset(HI, c) + U;
      localparam int OO = col_offset(HO, c);
      if (R > 0) begin : g_r
        assign nxt[OO +: R] = m[s][OI +: R];
      end
    end
    if (NBO < NBMAX) begin : g_pad
      assign nxt[NBMAX-1:NBO] = '0;
    end

    // the counters of this stage
    for (genvar j = int'(S.first[s]); j < int'(S.first[s+1]); j++) begin : g_cnt
      localparam place_t   P  = S.place[j];
      localparam counter_e K  = counter_e'(P.kind);
      localparam sig_t     G  = sig(K);
      localparam int       PS = int'(P.pos);
      logic [3:0][5:0] x;
      logic [4:0][1:0] y;
      for (genvar i = 0; i < 4; i++) begin : g_in
        for (genvar k = 0; k < 6; k++) begin : g_b
          if (i < int'(G.ncol) && k < int'(G.p[i])) begin : g_u
            assign x[i][k] = m[s][int'(P.in_base[i]) + k];
          end else begin : g_z
            assign x[i][k] = 1'b0;
          end
        end
      end
      gpc #(.KIND(K)) u_gpc (.x(x), .y(y));
      for (genvar i = 0; i < 5; i++) begin : g_out
        for (genvar k = 0; k < 2; k++) begin : g_b
          if (i < int'(G.nout) && k < int'(G.q[i]) && PS + i < W) begin : g_u
            assign nxt[int'(P.out_base[i]) + k] = y[i][k];
          end
        end
      end
    end

    if (PIPE[s]) begin : g_reg
      always_ff @(posedge clk) m[s+1] <= nxt;
    end else begin : g_wire
      assign m[s+1] = nxt;
    end
  end

  ragged_cpa #(.W(W), .HEIGHTS(S.height[NSTAGES])) u_cpa (
    .bits(m[NSTAGES][total_bits(S.height[NSTAGES])-1:0]),
    .sum (sum)
  );
endmodule
