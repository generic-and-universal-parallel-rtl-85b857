// full_adder -- the (3:1,1] counter.
//
// Adds three bits of equal weight: x[0] + x[1] + x[2] = 2*c + s.  On the
// FPGA it occupies a single LUT whose two outputs are used for sum and carry.
// It is both a floating counter of its own and the building block drawn as
// "FA" inside the LUTs of the atoms, the (2,5:1,2,1] counter and the ternary
// element.  Purely combinational.
module full_adder (
  input  logic [2:0] x,   // three weight-1 inputs
  output logic       s,   // sum, weight 1
  output logic       c    // carry, weight 2
);
  always_comb begin
    s = x[0] ^ x[1] ^ x[2];
    c = (x[0] & x[1]) | (x[0] & x[2]) | (x[1] & x[2]);
  end
endmodule
