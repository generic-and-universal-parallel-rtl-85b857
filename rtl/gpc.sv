// gpc -- uniform wrapper around every counter of the counter set.
//
// matrix_sum instantiates all counters through this one module so that a
// for-generate loop can place any kind: the counter kind is a parameter,
// inputs arrive as x[column][bit] and outputs leave as y[column][bit].
// Column j of the input is column pos+j of the matrix; y[i][k] is the k-th
// output bit of weight 2^(pos+i).  Bits a kind does not use are ignored on
// the input side and driven 0 on the output side.  Purely combinational.
module gpc
  import msum_pkg::*;
#(
  parameter counter_e KIND = C_FA
) (
  input  logic [3:0][5:0] x,   // inputs per column
  output logic [4:0][1:0] y    // outputs per column
);
  if (KIND == C_FA) begin : g_fa
    logic s, c;
    full_adder u (.x(x[0][2:0]), .s(s), .c(c));
    assign y = {6'b0, 1'b0, c, 1'b0, s};
  end else if (KIND == C_6_111) begin : g_6
    logic [2:0] r;
    gpc_6_111 u (.x(x[0]), .y(r));
    assign y = {4'b0, 1'b0, r[2], 1'b0, r[1], 1'b0, r[0]};
  end else if (KIND == C_25_121) begin : g_25
    logic s0, c0, s1, c1;
    gpc_25_121 u (.a(x[0][4:0]), .b(x[1][1:0]), .s0(s0), .c0(c0), .s1(s1), .c1(c1));
    assign y = {4'b0, 1'b0, c1, s1, c0, 1'b0, s0};
  end else if (KIND == C_1325) begin : g_1325
    logic [4:0] r;
    gpc_1325 u (.x0(x[0][4:0]), .x1(x[1][1:0]), .x2(x[2][2:0]), .x3(x[3][0]), .y(r));
    assign y = {1'b0, r[4], 1'b0, r[3], 1'b0, r[2], 1'b0, r[1], 1'b0, r[0]};
  end else begin : g_slice
    logic [4:0] r;
    slice_counter #(.UPPER(upper_atom(KIND)), .LOWER(lower_atom(KIND))) u (.x(x), .y(r));
    assign y = {1'b0, r[4], 1'b0, r[3], 1'b0, r[2], 1'b0, r[1], 1'b0, r[0]};
  end
endmodule
