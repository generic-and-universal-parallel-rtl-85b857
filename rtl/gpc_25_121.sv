// gpc_25_121 -- the (2,5:1,2,1] counter built from two LUTs.
//
// Inputs: five bits a[4:0] of weight 1 and two bits b[1:0] of weight 2.
// Outputs: s0 (weight 1), c0 and s1 (weight 2) and c1 (weight 4), so that
// a0+..+a4 + 2*(b0+b1) = s0 + 2*(c0+s1) + 4*c1.
// It does the work of three full adders in one logic level: a middle full
// adder over a[4:2] whose sum feeds the low full adder (with a[1:0]) and
// whose carry feeds the high full adder (with b[1:0]).  On the FPGA the
// middle adder is split over the two LUTs: LUT_LO computes the low adder
// (sum and carry, two 5-input functions of a[4:0]) and LUT_HI the high adder
// (two 5-input functions of a[4:2], b[1:0]).  Purely combinational.
module gpc_25_121 (
  input  logic [4:0] a,   // weight 1
  input  logic [1:0] b,   // weight 2
  output logic       s0,  // weight 1
  output logic       c0,  // weight 2
  output logic       s1,  // weight 2
  output logic       c1   // weight 4
);
  logic sm, cm;

  full_adder u_mid (.x(a[4:2]),          .s(sm), .c(cm));
  full_adder u_lo  (.x({sm, a[1:0]}),    .s(s0), .c(c0));
  full_adder u_hi  (.x({cm, b[1:0]}),    .s(s1), .c(c1));
endmodule
