// rksa_i: random key scheduling for I-SUC (RKSA_I).  The round key
// K^r = k15 || ... || k1 || k0 (4-bit symbols).  Symbols k1..k15 come from
// 60 random 4-to-1 LUTs (four per symbol) addressed by four bits of the
// 5-bit round counter; symbol k0 is the XOR of k1..k15, built as a tree of
// five 4-input XORs (four on the first level, one on the second), so the XOR
// of all 16 key symbols is zero.  That property makes the key addition
// commute with the involutive diffusion layer, which is what lets I-SUC
// decrypt with the encryption datapath.  Combinational.
// Following the paper: 60 key LUTs, the XOR tree for k0, the 5-bit counter.
// Own choice: symbols k1..k7 read cnt[3:0], k8..k15 read cnt[4:1].
module rksa_i
  import suc_pkg::*;
(
  input  lut_cfg_t [I_KEY_LUTS-1:0] cfg,   // cfg[4*(s-1)+b] = LUT for bit b of k_s
  input  logic     [CNT_W-1:0]      cnt,
  output block_t                    key
);
  logic [3:0] sym [1:15];                    // LUT-stored symbols k1..k15
  logic [3:0] sym0;                          // k0, XOR of the others
  logic [3:0] c_lsb, c_msb;
  logic [3:0] xl1 [4];                       // first XOR level

  always_comb begin
    c_lsb = cnt[3:0];
    c_msb = cnt[4:1];
  end

  for (genvar s = 1; s < 16; s++) begin : g_sym
    for (genvar b = 0; b < 4; b++) begin : g_bit
      lut4 u_lut (.cfg(cfg[4*(s-1)+b]), .x(s < 8 ? c_lsb : c_msb), .y(sym[s][b]));
    end
  end

  // k0 = k1 ^ ... ^ k15: groups {k1..k3}, {k4..k7}, {k8..k11}, {k12..k15}
  always_comb begin
    xl1[0] = sym[1]  ^ sym[2]  ^ sym[3];
    xl1[1] = sym[4]  ^ sym[5]  ^ sym[6]  ^ sym[7];
    xl1[2] = sym[8]  ^ sym[9]  ^ sym[10] ^ sym[11];
    xl1[3] = sym[12] ^ sym[13] ^ sym[14] ^ sym[15];
    sym0   = xl1[0] ^ xl1[1] ^ xl1[2] ^ xl1[3];
    key[3:0] = sym0;
    for (int s = 1; s < 16; s++) key[4*s +: 4] = sym[s];
  end
endmodule
