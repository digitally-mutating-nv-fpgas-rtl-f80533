// sbox4_lut: a 4-to-4-bit S-box template made of four lut4 cells, LUT_b
// producing output bit y_b from all four inputs x3..x0 (64 configuration
// bits in all), as the paper's S-box-in-bitstream example shows.  Which
// bijection it realises is set only by the truth tables the GENIE writes.
// Combinational, no clock.
module sbox4_lut
  import suc_pkg::*;
(
  input  sbox_cfg_t  cfg,   // cfg[b] = truth table of LUT_b
  input  logic [3:0] x,
  output logic [3:0] y
);
  for (genvar b = 0; b < 4; b++) begin : g_lut
    lut4 u_lut (.cfg(cfg[b]), .x(x), .y(y[b]));
  end
endmodule
