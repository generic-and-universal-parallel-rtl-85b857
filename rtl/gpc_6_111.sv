// gpc_6_111 -- the (6:1,1,1] counter: population count of six bits.
//
// Six bits of equal weight are counted into a 3-bit binary number, one LUT
// per output bit (three LUTs, each a 6-input function of all inputs).  It is
// the counter of choice for reducing a single tall column.  The counter is
// adopted from earlier work; only its function is given, so each output bit
// is written as the corresponding bit of the arithmetic count.
// Purely combinational.
module gpc_6_111 (
  input  logic [5:0] x,   // six weight-1 inputs
  output logic [2:0] y    // count, y[i] has weight 2^i
);
  always_comb begin
    y = 3'({2'b0, x[0]} + {2'b0, x[1]} + {2'b0, x[2]}) +
        3'({2'b0, x[3]} + {2'b0, x[4]} + {2'b0, x[5]});
  end
endmodule
