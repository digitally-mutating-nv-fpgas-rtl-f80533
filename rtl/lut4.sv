// lut4: a 4-input look-up table, the FPGA element every SUC template is made
// of.  The 16-bit truth table `cfg` is the LUT's share of the configuration
// bitstream; the output is cfg[{x3,x2,x1,x0}].  Purely combinational.
// The truth-table bit order is this design's choice; the paper only states
// that a LUT holds 16 bits and realises any 4-to-1 function.
module lut4 (
  input  logic [15:0] cfg,
  input  logic [3:0]  x,
  output logic        y
);
  always_comb y = cfg[x];
endmodule
