// carry_cell -- one bit position of an FPGA slice carry chain.
//
// It models the multiplexer and XOR that follow each LUT on the carry chain
// of Xilinx 7-series slices: the LUT supplies a propagate signal `prop` and,
// on its second output, a generate value `gen` for the multiplexer's 0 input.
// When `prop` is 1 the incoming carry `cin` is passed on, otherwise `gen`
// becomes the carry out.  The sum bit is prop ^ cin.  As a pair, the cell
// adds two equal bits g + x with prop = g ^ x, so s + 2*cout = g + x + cin.
// Purely combinational.  This generic mux/xor pair stands in for the vendor
// primitive, which is not reproduced.
module carry_cell (
  input  logic prop,   // LUT O6: propagate
  input  logic gen,    // LUT O5 / bypass: value selected when prop = 0
  input  logic cin,    // carry from the less significant position
  output logic s,      // sum bit
  output logic cout    // carry to the more significant position
);
  always_comb begin
    s    = prop ^ cin;
    cout = prop ? cin : gen;
  end
endmodule
