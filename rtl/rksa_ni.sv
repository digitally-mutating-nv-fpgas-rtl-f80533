// rksa_ni: random key scheduling for NI-SUC (RKSA_NI).  Each of the 64
// round-key bits k_i^j is a random 4-to-1 LUT addressed by four bits of the
// 5-bit round counter: key bits 0..31 see the counter's four low bits
// cnt[3:0], key bits 32..63 its four high bits cnt[4:1].  The 64 truth
// tables (1024 bits) are filled from the TRNG by the GENIE, so the 32 round
// keys K_0..K_31 are unknown.  The counter itself lives in the cipher core
// (it counts up to encrypt and down to decrypt); this block is combinational.
// Following the paper: 64 LUTs, 5-bit counter, LSB/MSB nibble addressing.
// Own choice: which half of the key sees which counter nibble (the figure
// does not print it).
module rksa_ni
  import suc_pkg::*;
(
  input  lut_cfg_t [NI_KEY_LUTS-1:0] cfg,   // F_k^j truth tables
  input  logic     [CNT_W-1:0]       cnt,   // round counter i
  output block_t                     key    // round key K_i
);
  logic [3:0] c_lsb, c_msb;
  always_comb begin
    c_lsb = cnt[3:0];
    c_msb = cnt[4:1];
  end
  for (genvar j = 0; j < NI_KEY_LUTS; j++) begin : g_key
    lut4 u_lut (.cfg(cfg[j]), .x(j < 32 ? c_lsb : c_msb), .y(key[j]));
  end
endmodule
