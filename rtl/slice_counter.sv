// slice_counter -- a whole-slice counter composed of two atoms.
//
// The lower atom covers columns 0 and 1, the upper atom columns 2 and 3;
// they are connected only through the carry chain.  The chain input of the
// lower atom carries one more weight-1 bit, except for a lower ATOM_06
// whose LUT bypass blocks that input (it is tied to 0 there).  The result
// is a 5-bit number y (single row, columns 0..4).  With the notation
// (upper, lower) the nine combinations give the counters
// (2,2,2,3) (2,2,1,5) (2,2,0,6) (1,4,2,3) (1,4,1,5) (1,4,0,6) (0,6,2,3)
// (0,6,1,5) and (0,6,0,6), where (2,2,2,3) is a plain 4-bit ripple adder.
// Input x[i][j] is bit j of column i; bits a counter variant does not use
// are ignored.  Purely combinational.
module slice_counter
  import msum_pkg::*;
#(
  parameter atom_e UPPER = ATOM_06,
  parameter atom_e LOWER = ATOM_14
) (
  input  logic [3:0][5:0] x,   // x[column][bit]
  output logic [4:0]      y    // result, y[i] has weight 2^i
);
  localparam int LA = atom_w1(LOWER);   // weight-1 bits of the lower atom
  logic cin, cmid;

  if (LOWER == ATOM_06) begin : g_nocin
    assign cin = 1'b0;
  end else begin : g_cin
    assign cin = x[0][LA];
  end

  counter_atom #(.KIND(LOWER)) u_lo (
    .a(x[0]), .b(x[1][1:0]), .cin(cin), .s(y[1:0]), .cout(cmid));
  counter_atom #(.KIND(UPPER)) u_hi (
    .a(x[2]), .b(x[3][1:0]), .cin(cmid), .s(y[3:2]), .cout(y[4]));
endmodule
