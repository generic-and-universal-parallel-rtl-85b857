// counter_atom -- a two-column counter atom occupying two LUTs of a slice
// and two positions of its carry chain.
//
// Three variants, named by their (weight-2 bits, weight-1 bits):
//   ATOM_22: a[1:0] weight 1, b[1:0] weight 2 -- two ripple-adder positions.
//            Low LUT: prop = a0^a1, gen = a1; high LUT: prop = b0^b1, gen = b1.
//   ATOM_14: a[3:0] weight 1, b[0] weight 2.  Both LUTs contain a full adder
//            over a[2:0]; the low LUT uses its sum (prop = sum^a3, gen = a3),
//            the high LUT its carry (prop = carry^b0, gen = b0).
//   ATOM_06: a[5:0] weight 1.  Both LUTs contain two cascaded full adders,
//            FA_l over a[2:0] and FA_r over (FA_l sum, a3, a4).  Low LUT:
//            prop = FA_r sum ^ a5, with a5 taking the LUT bypass to the
//            multiplexer's 0 input; high LUT: prop = FA_l carry ^ FA_r carry,
//            gen = FA_l carry.  Because a5 occupies the bypass, the atom
//            cannot receive an external carry in the lowest chain position:
//            the slice counter then ties cin to 0.
// In all variants  sum(a) + 2*sum(b) + cin = s[0] + 2*s[1] + 4*cout.
// Unused a/b inputs of a variant are ignored.  Purely combinational; the
// carry input and output are the slice's fast carry-chain links.
module counter_atom
  import msum_pkg::*;
#(
  parameter atom_e KIND = ATOM_22
) (
  input  logic [5:0] a,     // weight-1 bits (2, 4 or 6 used)
  input  logic [1:0] b,     // weight-2 bits (2, 1 or 0 used)
  input  logic       cin,   // carry chain in
  output logic [1:0] s,     // sum bits, weights 1 and 2
  output logic       cout   // carry chain out, weight 4
);
  logic p0, g0, p1, g1, c1;

  if (KIND == ATOM_22) begin : g_22
    assign p0 = a[0] ^ a[1];
    assign g0 = a[1];
    assign p1 = b[0] ^ b[1];
    assign g1 = b[1];
  end else if (KIND == ATOM_14) begin : g_14
    logic fs, fc;
    full_adder u_fa (.x(a[2:0]), .s(fs), .c(fc));
    assign p0 = fs ^ a[3];
    assign g0 = a[3];
    assign p1 = fc ^ b[0];
    assign g1 = b[0];
  end else begin : g_06
    logic ls, lc, rs, rc;
    full_adder u_fa_l (.x(a[2:0]),          .s(ls), .c(lc));
    full_adder u_fa_r (.x({a[4:3], ls}),    .s(rs), .c(rc));
    assign p0 = rs ^ a[5];
    assign g0 = a[5];
    assign p1 = lc ^ rc;
    assign g1 = lc;
  end

  carry_cell u_cy0 (.prop(p0), .gen(g0), .cin(cin), .s(s[0]), .cout(c1));
  carry_cell u_cy1 (.prop(p1), .gen(g1), .cin(c1),  .s(s[1]), .cout(cout));
endmodule
