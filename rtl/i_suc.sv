// i_suc: round-iterative I-SUC (involutive Secret Unknown Cipher), 64-bit
// block, R = 32 rounds, 31 round keys K^0..K^30.
//
//   Y = SL(K^30 ^ P(SL( ... K^0 ^ P(SL(X)) ... )))
//
// SL is one layer of 16 template involutive S-boxes, the same layer in every
// round (the paper's low-cost choice SL_i = SL_0), P the involutive
// diffusion layer (i_diffusion).  Since SL and P are involutions and every
// round key has XOR-sum zero (rksa_i), decryption is the same circuit with
// the key order reversed: `dec` only makes the round counter start at 30 and
// count down.
//
// Datapath: one 64-bit register; per clock reg <= P(SL(reg)) ^ K^cnt.  After
// 31 such steps the final S-layer is applied combinationally at the output
// (the last round has no diffusion), so one S-layer instance serves all 32
// rounds.
//
// Interface as ni_suc: `start` latches `din`/`dec`; `done` rises 32 clock
// edges later (1 load + 31 steps) and holds with `dout` until the next
// start.  Template LUTs are written through `cfg` (template indices
// 192..315, see suc_pkg) and are never reset (non-volatile cells).
module i_suc
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

  sbox_cfg_t sb_cfg [NIBBLES];
  lut_cfg_t [I_KEY_LUTS-1:0] key_cfg;

  logic [CNT_W-1:0] cnt_q;
  logic             dec_q;
  block_t           state_r, key, s_out, next;
  logic [TIDX_W-1:0] kidx;

  always_comb kidx = cfg.idx - TIDX_W'(T_I_KEY);

  // Template configuration (non-volatile: no reset)
  always_ff @(posedge clk) begin
    if (cfg.we) begin
      if (cfg.idx >= TIDX_W'(T_I_SB) && cfg.idx < TIDX_W'(T_I_KEY))
        sb_cfg[cfg.idx[5:2]][cfg.idx[1:0]] <= cfg.data;
      else if (cfg.idx >= TIDX_W'(T_I_KEY) && cfg.idx < TIDX_W'(N_TMPL))
        key_cfg[kidx[5:0]] <= cfg.data;
    end
  end

  rksa_i u_ks (.cfg(key_cfg), .cnt(cnt_q), .key(key));

  for (genvar i = 0; i < NIBBLES; i++) begin : g_sl
    sbox4_lut u_sb (.cfg(sb_cfg[i]), .x(state_r[4*i +: 4]), .y(s_out[4*i +: 4]));
  end

  i_diffusion u_p (.s_out(s_out), .key(key), .o(next));

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
          cnt_q   <= dec ? CNT_W'(I_ROUNDS - 2) : '0;
          state_q <= RUN;
        end
        RUN: begin
          state_r <= next;
          if (dec_q ? (cnt_q == '0) : (cnt_q == CNT_W'(I_ROUNDS - 2)))
            state_q <= DONE;
          else
            cnt_q <= dec_q ? cnt_q - 1'b1 : cnt_q + 1'b1;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  always_comb begin
    busy = (state_q == RUN);
    done = (state_q == DONE);
    dout = s_out;
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("i_suc: start while busy");
endmodule
