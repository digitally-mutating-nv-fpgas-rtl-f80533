// suc_pkg: types, constants and pure functions shared by the Secret Unknown
// Cipher (SUC) templates and the manipulating GENIE.
//
// The SUC state is 64 bits seen as 16 nibbles; nibble i (bits 4i+3..4i) is
// the input of S-box S_i, with S_15 at the most significant end.  A 4-bit
// S-box is held as four 16-bit LUT truth tables (LUT_b produces output bit
// y_b, truth-table bit index = {x3,x2,x1,x0}).  A cipher data base entry is
// held as a 64-bit "value table": nibble x is S(x).
//
// Template index space (the order in which template words appear in the
// bitstream, and the configuration address seen by the cipher cores):
//   0..63    NI-SUC forward S-box LUTs   (slot = idx/4, output bit = idx%4)
//   64..127  NI-SUC inverse S-box LUTs   (the decryption S-layer)
//   128..191 NI-SUC key LUTs F_k^j       (j = idx-128)
//   192..255 I-SUC involutive S-box LUTs
//   256..315 I-SUC key LUTs              (nibbles k1..k15, 4 LUTs each)
// This ordering and the value-table format are choices of this design; the
// paper does not give a bitstream format.
package suc_pkg;

  localparam int unsigned BLOCK_W   = 64;   // block size N
  localparam int unsigned NIBBLES   = 16;   // S-boxes per layer
  localparam int unsigned LUT_W     = 16;   // truth-table bits of a 4-LUT
  localparam int unsigned CNT_W     = 5;    // round counter width (Fig. 10, 13)

  localparam int unsigned NI_ROUNDS = 31;   // R of NI-SUC, R+1 = 32 round keys
  localparam int unsigned I_ROUNDS  = 32;   // R of I-SUC, 31 round keys

  localparam int unsigned NI_KEY_LUTS = 64;
  localparam int unsigned I_KEY_LUTS  = 60;
  localparam int unsigned SB_LUTS     = 64; // 16 S-boxes x 4 LUTs

  // Template index map
  localparam int unsigned T_NI_FWD = 0;
  localparam int unsigned T_NI_INV = T_NI_FWD + SB_LUTS;      // 64
  localparam int unsigned T_NI_KEY = T_NI_INV + SB_LUTS;      // 128
  localparam int unsigned T_I_SB   = T_NI_KEY + NI_KEY_LUTS;  // 192
  localparam int unsigned T_I_KEY  = T_I_SB + SB_LUTS;        // 256
  localparam int unsigned N_TMPL   = T_I_KEY + I_KEY_LUTS;    // 316
  localparam int unsigned TIDX_W   = 9;

  // Cipher data base sizes (Sec. VI-B and VII-B)
  localparam int unsigned NI_CDB_SIZE = 1396032;  // optimal 4-bit S-boxes
  localparam int unsigned I_CDB_SIZE  = 145920;   // optimal involutive S-boxes
  localparam int unsigned CDB_IDX_W   = 21;       // ceil(log2(1396032))
  localparam int unsigned NI_IDX_W    = 21;
  localparam int unsigned I_IDX_W     = 18;       // ceil(log2(145920))

  typedef logic [LUT_W-1:0]   lut_cfg_t;
  typedef logic [BLOCK_W-1:0] block_t;
  typedef lut_cfg_t [3:0]     sbox_cfg_t;        // LUT_3..LUT_0 of one S-box

  // Configuration write into the template LUTs (one truth table per beat)
  typedef struct packed {
    logic              we;
    logic [TIDX_W-1:0] idx;
    lut_cfg_t          data;
  } cfg_wr_t;

  typedef enum logic [0:0] {CDB_OPTIMAL = 1'b0, CDB_INVOLUTIVE = 1'b1} cdb_sel_e;

  // Table I: bit i of round r goes to bit p(i) of round r+1.
  function automatic int unsigned ni_p(input int unsigned i);
    return 4 * (i % 16) + i / 16;
  endfunction

  function automatic block_t ni_perm(input block_t x);
    block_t y;
    for (int unsigned i = 0; i < BLOCK_W; i++) y[ni_p(i)] = x[i];
    return y;
  endfunction

  function automatic block_t ni_perm_inv(input block_t y);
    block_t x;
    for (int unsigned i = 0; i < BLOCK_W; i++) x[i] = y[ni_p(i)];
    return x;
  endfunction

  // Column b of a value table: the truth table of LUT_b.
  function automatic lut_cfg_t sbox_lut_column(input logic [63:0] vt,
                                               input logic [1:0]  b);
    lut_cfg_t t;
    for (int unsigned x = 0; x < 16; x++) t[x] = vt[4*x + int'(b)];
    return t;
  endfunction

  // Value table of the inverse permutation: inv[S(x)] = x.
  function automatic logic [63:0] sbox_invert(input logic [63:0] vt);
    logic [63:0] r;
    r = '0;
    for (int unsigned x = 0; x < 16; x++) r[4*vt[4*x +: 4] +: 4] = 4'(x);
    return r;
  endfunction

endpackage
