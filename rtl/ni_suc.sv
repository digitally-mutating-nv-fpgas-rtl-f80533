// ni_suc: area-optimised, round-iterative NI-SUC (non-involutive Secret
// Unknown Cipher), 64-bit block, R = 31 rounds, 32 round keys K_0..K_31.
//
// Encryption (the SPN of the paper): s_0 = X, s_{i+1} = P(S(s_i ^ K_i)) for
// i = 0..30, Y = s_31 ^ K_31, where S is a layer of 16 template S-boxes and
// P the fixed bit permutation of Table I (wiring only).  One round per clock
// is computed around a single 64-bit register, as in the paper's area
// optimised datapath: a 2:1 input mux (1 = new block, 0 = feedback), the
// register, the round-key XOR (whose output is also the result tap), the
// S-layer and the permutation.
//
// Decryption uses the same register, counter and key schedule with the
// counter running down: d_0 = Y, d_{j+1} = S^-1(P^-1(d_j ^ K_{31-j})),
// X = d_31 ^ K_0.  It needs a second S-layer template holding the inverse
// S-boxes (the paper only prototyped encryption and states that decryption
// must be added, sharing the key schedule); the GENIE fills it with the
// inverses of the forward S-boxes.
//
// Interface: `start` (one cycle, only while idle) latches `din` and `dec`.
// `done` rises 32 clock edges later (1 load + 31 rounds) and stays high,
// with the result on `dout`, until the next start.  `busy` is high in
// between.  Template LUTs are written through `cfg` (template indices
// 0..191, see suc_pkg); they are never reset, modelling non-volatile
// configuration cells.
module ni_suc
  import suc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    start,
  input  logic    dec,
  input  block_t  din,
  output logic    busy,
  output logic    done,
  output block_t  dout
);
  typedef enum logic [1:0] {IDLE, RUN, DONE} state_e;
  state_e state_q;

  sbox_cfg_t fwd_cfg [NIBBLES];
  sbox_cfg_t inv_cfg [NIBBLES];
  lut_cfg_t [NI_KEY_LUTS-1:0] key_cfg;

  logic [CNT_W-1:0] cnt_q;
  logic             dec_q;
  block_t           state_r, key, x_k, s_fwd, s_inv, p_inv, next;

  // Template configuration (non-volatile: no reset)
  always_ff @(posedge clk) begin
    if (cfg.we) begin
      if (cfg.idx < TIDX_W'(T_NI_INV))
        fwd_cfg[cfg.idx[5:2]][cfg.idx[1:0]] <= cfg.data;
      else if (cfg.idx < TIDX_W'(T_NI_KEY))
        inv_cfg[cfg.idx[5:2]][cfg.idx[1:0]] <= cfg.data;
      else if (cfg.idx < TIDX_W'(T_I_SB))
        key_cfg[cfg.idx[5:0]] <= cfg.data;
    end
  end

  rksa_ni u_ks (.cfg(key_cfg), .cnt(cnt_q), .key(key));

  always_comb begin
    x_k   = state_r ^ key;
    p_inv = ni_perm_inv(x_k);
  end

  for (genvar i = 0; i < NIBBLES; i++) begin : g_sl
    sbox4_lut u_fwd (.cfg(fwd_cfg[i]), .x(x_k[4*i +: 4]),   .y(s_fwd[4*i +: 4]));
    sbox4_lut u_inv (.cfg(inv_cfg[i]), .x(p_inv[4*i +: 4]), .y(s_inv[4*i +: 4]));
  end

  always_comb next = dec_q ? s_inv : ni_perm(s_fwd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      cnt_q   <= '0;
      dec_q   <= 1'b0;
      state_r <= '0;
    end else begin
      unique case (state_q)
        IDLE, DONE: if (start) begin
          state_r <= din;
          dec_q   <= dec;
          cnt_q   <= dec ? CNT_W'(NI_ROUNDS) : '0;
          state_q <= RUN;
        end
        RUN: begin
          state_r <= next;
          cnt_q   <= dec_q ? cnt_q - 1'b1 : cnt_q + 1'b1;
          if (dec_q ? (cnt_q == CNT_W'(1)) : (cnt_q == CNT_W'(NI_ROUNDS - 1)))
            state_q <= DONE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  always_comb begin
    busy = (state_q == RUN);
    done = (state_q == DONE);
    dout = x_k;
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("ni_suc: start while busy");
endmodule
