// ternary_element -- one bit position of a ternary adder on the carry chain.
//
// Adds three bits a[2:0] of this position, the secondary carry z from the
// position below and the chain carry c:
//     a0 + a1 + a2 + z + c = s + 2*(cout + zout).
// The LUT holds a full adder over a[2:0]; its sum is XORed with z to form
// the propagate signal, and its carry leaves as the secondary carry zout
// (z') for the next position over general routing.  z also feeds the
// multiplexer's 0 input, so the chain computes cout (c') = prop ? c : z and
// s = prop ^ c.  zout does not depend on z, so a chain of elements has no
// long path through the secondary carries.  Purely combinational.
module ternary_element (
  input  logic [2:0] a,     // three operand bits of this position
  input  logic       z,     // secondary carry in (z)
  input  logic       c,     // chain carry in (c)
  output logic       s,     // sum bit
  output logic       cout,  // chain carry out (c')
  output logic       zout   // secondary carry out (z')
);
  logic fs, prop;

  full_adder u_fa (.x(a), .s(fs), .c(zout));
  assign prop = fs ^ z;
  carry_cell u_cy (.prop(prop), .gen(z), .cin(c), .s(s), .cout(cout));
endmodule
