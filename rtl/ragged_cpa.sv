// ragged_cpa -- the flexible carry-propagate adder that ends the summation.
//
// The compression stages leave a "ragged" matrix: every column c holds
// HEIGHTS[c] bits, between 0 and 4, and the columns need not share a common
// height.  This adder accepts any such matrix whose columns satisfy, from
// right to left, height <= 4 and height + carries <= 5, where `carries` is
// the number of carries (0, 1 or 2) that the element of the column below
// passes up.  Each column gets one element, selected by its height and
// incoming carries (total t = height + carries):
//   t = 0: nothing;  t = 1: bit copy (CP);
//   t = 2 or 3: full adder on the carry chain (FA), one carry out (c');
//   t = 4 or 5: ternary element (TE), carries out c' and secondary z'.
// so the carries into column c+1 are (carries + height) / 2.  An FA element
// takes its LUT inputs from the column's bits and the secondary carry z;
// with no carry arriving, a third bit enters through the chain input.  A TE
// takes three bits into its LUT full adder, the fourth input (a fourth bit
// or z) into its secondary-carry slot, and the chain carry c.
// Bits enter flat: column 0 first, HEIGHTS[0] bits, then column 1, and so on.
// Carries out of the top column are dropped (the caller sizes W so the total
// always fits).  A column that violates the rule stops elaboration.
// Purely combinational; the carry ripples through all W columns.
module ragged_cpa
  import msum_pkg::*;
#(
  parameter int    W       = 9,   // result width
  // column heights, column 0 last: the ragged example 1,3,4,1,2,4,3,1 (column 0 first)
  parameter hvec_t HEIGHTS = hvec_t'({11'd1, 11'd3, 11'd4, 11'd2, 11'd1, 11'd4, 11'd3, 11'd1}),
  localparam int   NB      = total_bits(HEIGHTS)
) (
  input  logic [NB-1:0] bits,   // the matrix, column by column
  output logic [W-1:0]  sum     // binary total
);
  logic [W:0] cc;   // chain carry into each column
  logic [W:0] zz;   // secondary carry into each column

  assign cc[0] = 1'b0;
  assign zz[0] = 1'b0;

  for (genvar c = 0; c < W; c++) begin : g_col
    localparam int   H   = int'(HEIGHTS[c]);
    localparam int   K   = cp_carries(HEIGHTS, c);
    localparam int   OFF = col_offset(HEIGHTS, c);
    localparam cpe_e E   = cp_element(K, H);
    logic [4:0] a;     // the column's bits, zero padded

    for (genvar j = 0; j < 5; j++) begin : g_a
      if (j < H) begin : g_bit
        assign a[j] = bits[OFF + j];
      end else begin : g_zero
        assign a[j] = 1'b0;
      end
    end

    if (E == CPE_NA) begin : g_bad
      $error("ragged_cpa: column %0d has height %0d with %0d carries", c, H, K);
    end else if (E == CPE_NONE) begin : g_none
      assign sum[c]  = 1'b0;
      assign cc[c+1] = 1'b0;
      assign zz[c+1] = 1'b0;
    end else if (E == CPE_COPY) begin : g_copy
      assign sum[c]  = (K > 0) ? cc[c] : a[0];
      assign cc[c+1] = 1'b0;
      assign zz[c+1] = 1'b0;
    end else if (E == CPE_FA) begin : g_fa
      logic x0, x1, ci;
      if (K == 2) begin : g_k2          // z and c arrive, at most one bit
        assign x0 = zz[c];
        assign x1 = a[0];
        assign ci = cc[c];
      end else if (K == 1) begin : g_k1 // c arrives, one or two bits
        assign x0 = a[0];
        assign x1 = a[1];
        assign ci = cc[c];
      end else begin : g_k0             // two or three bits, the third on the chain input
        assign x0 = a[0];
        assign x1 = a[1];
        assign ci = a[2];
      end
      carry_cell u_cy (.prop(x0 ^ x1), .gen(x0), .cin(ci), .s(sum[c]), .cout(cc[c+1]));
      assign zz[c+1] = 1'b0;
    end else begin : g_te
      logic zin, ci;
      assign zin = (K == 2) ? zz[c] : a[3];
      assign ci  = (K >= 1) ? cc[c] : 1'b0;
      ternary_element u_te (.a(a[2:0]), .z(zin), .c(ci), .s(sum[c]), .cout(cc[c+1]), .zout(zz[c+1]));
    end
  end
endmodule
