// gpc_1325 -- the (1,3,2,5:1,1,1,1,1] whole-slice counter.
//
// Inputs: five bits of weight 1, two of weight 2, three of weight 4 and one
// of weight 8 (largest total 29); output: the total as a 5-bit number.  The
// counter is adopted from earlier work and occupies one slice (four LUTs on
// the carry chain); its internal mapping is not spelled out, so this module
// states the function as a weighted sum and leaves the mapping to synthesis.
// Purely combinational.
module gpc_1325 (
  input  logic [4:0] x0,  // weight 1
  input  logic [1:0] x1,  // weight 2
  input  logic [2:0] x2,  // weight 4
  input  logic       x3,  // weight 8
  output logic [4:0] y    // total
);
  logic [2:0] n0;
  logic [1:0] n1, n2;

  always_comb begin
    n0 = 3'(x0[0]) + 3'(x0[1]) + 3'(x0[2]) + 3'(x0[3]) + 3'(x0[4]);
    n1 = 2'(x1[0]) + 2'(x1[1]);
    n2 = 2'(x2[0]) + 2'(x2[1]) + 2'(x2[2]);
    y  = 5'(n0) + {2'b0, n1, 1'b0} + {1'b0, n2, 2'b0} + {1'b0, x3, 3'b0};
  end
endmodule
