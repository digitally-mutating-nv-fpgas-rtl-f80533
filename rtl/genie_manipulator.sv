// genie_manipulator: the manipulating GENIE that mutates a device into its
// own Secret Unknown Cipher while the clear configuration bitstream BS' is
// loaded.
//
// BS' arrives as a stream of 16-bit words (valid/ready, `in_last` on the
// final word) and leaves as the personalised stream BS'_u.  A location table
// (the bitstream manipulation tool's list of template addresses, written
// through `tbl_*` before loading, one ascending word address per template
// index) tells where the template LUT words sit.  Ordinary words pass
// through unchanged; at a template word the switch substitutes fresh
// content, chosen by the TRNG:
//   * first LUT of an S-box slot: draw a random data-base index bit by bit
//     (21 bits for the 1396032 optimal S-boxes, 18 for the 145920 optimal
//     involutive ones), redraw if it is out of range, fetch that S-box from
//     the cipher data base (CDB) and keep it;
//   * S-box LUT b: column b of the kept S-box (the truth table of y_b);
//   * NI-SUC inverse S-box LUTs: the columns of the inverse of the S-box
//     chosen for the same slot (remembered in a 16 x 64-bit store);
//   * key LUT: 16 fresh TRNG bits.
// Every substituted word is also written into the template (`cfg`), which
// stands for the fabric taking the LUT contents from BS'_u.  The input
// stream stalls while random bits or a CDB entry are awaited.
// When the last word passes and all N_TMPL templates were filled, the GENIE
// locks for good: it accepts no further bitstream, no table writes and
// writes no template again (the paper's irreversible reconfiguration lock
// after which the GENIE is deleted).  If the bitstream ends early,
// `tmpl_error` is raised and the walk restarts for a new load.  The lock is
// cleared only by `nv_erase_n`, standing for a blank, never personalised
// device.
//
// Own choices (the paper gives no format): 16-bit words, template order of
// suc_pkg, bit-serial TRNG port, rejection sampling for the index, request/
// acknowledge CDB port returning a value table (nibble x = S(x)).
module genie_manipulator
  import suc_pkg::*;
#(
  parameter int unsigned ADDR_W = 20         // bitstream word address width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              nv_erase_n,
  // template location table
  input  logic              tbl_we,
  input  logic [TIDX_W-1:0] tbl_idx,
  input  logic [ADDR_W-1:0] tbl_addr,
  // clear bitstream BS' in
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [15:0]       in_data,
  input  logic              in_last,
  // personalised bitstream BS'_u out
  output logic              out_valid,
  input  logic              out_ready,
  output logic [15:0]       out_data,
  output logic              out_last,
  // TRNG, one bit per handshake
  input  logic              trng_valid,
  input  logic              trng_bit,
  output logic              trng_ready,
  // cipher data base
  output logic                 cdb_req,
  output cdb_sel_e             cdb_sel,
  output logic [CDB_IDX_W-1:0] cdb_idx,
  input  logic                 cdb_ack,
  input  logic [63:0]          cdb_sbox,
  // template configuration
  output cfg_wr_t           cfg,
  // status
  output logic              locked,
  output logic              tmpl_error,
  output logic [15:0]       reject_cnt,
  output logic [15:0]       trng_bits_used
);
  typedef enum logic [1:0] {RUN, DRAW, FETCH} state_e;
  state_e state_q;

  logic [ADDR_W-1:0]    tbl [N_TMPL];
  logic [63:0]          sb_mem [NIBBLES];
  logic [ADDR_W-1:0]    word_cnt;
  logic [TIDX_W-1:0]    ptr;
  logic                 fetched;
  logic [CDB_IDX_W-1:0] acc;
  logic [4:0]           nbits;
  logic [63:0]          sb_cur;

  // role of the template word at `ptr`
  logic       is_ni_fwd, is_ni_inv, is_i_sb, is_key, need_sbox, need_draw, hit, content_ok;
  logic [1:0] bsel;
  logic [3:0] slot;
  logic [4:0] draw_len;
  logic [CDB_IDX_W-1:0] acc_next;
  logic [15:0] content;
  logic        can_out, take;

  always_comb begin
    is_ni_fwd = ptr <  TIDX_W'(T_NI_INV);
    is_ni_inv = ptr >= TIDX_W'(T_NI_INV) && ptr < TIDX_W'(T_NI_KEY);
    is_i_sb   = ptr >= TIDX_W'(T_I_SB)   && ptr < TIDX_W'(T_I_KEY);
    is_key    = (ptr >= TIDX_W'(T_NI_KEY) && ptr < TIDX_W'(T_I_SB)) ||
                (ptr >= TIDX_W'(T_I_KEY)  && ptr < TIDX_W'(N_TMPL));
    bsel      = ptr[1:0];
    slot      = ptr[5:2];
    need_sbox = (is_ni_fwd || is_i_sb) && bsel == 2'd0;
    need_draw = need_sbox || is_key;
    hit       = ptr < TIDX_W'(N_TMPL) && word_cnt == tbl[ptr];
    content_ok = fetched || !need_draw;
    draw_len  = is_key ? 5'd16 : (is_i_sb ? 5'(I_IDX_W) : 5'(NI_IDX_W));
    acc_next  = {acc[CDB_IDX_W-2:0], trng_bit};

    if (is_ni_inv)    content = sbox_lut_column(sbox_invert(sb_mem[slot]), bsel);
    else if (is_key)  content = acc[15:0];
    else              content = sbox_lut_column(sb_cur, bsel);

    can_out    = !out_valid || out_ready;
    in_ready   = state_q == RUN && !locked && can_out && (!hit || content_ok);
    take       = in_valid && in_ready;
    trng_ready = state_q == DRAW;
    cdb_req    = state_q == FETCH;
    cdb_sel    = is_i_sb ? CDB_INVOLUTIVE : CDB_OPTIMAL;
  end

  // location table (ignored once locked)
  always_ff @(posedge clk) begin
    if (tbl_we && !locked && tbl_idx < TIDX_W'(N_TMPL)) tbl[tbl_idx] <= tbl_addr;
  end

  // one-way lock
  always_ff @(posedge clk or negedge nv_erase_n) begin
    if (!nv_erase_n) locked <= 1'b0;
    else if (take && in_last && (ptr + TIDX_W'(hit)) == TIDX_W'(N_TMPL)) locked <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= RUN;
      word_cnt   <= '0;
      ptr        <= '0;
      fetched    <= 1'b0;
      acc        <= '0;
      nbits      <= '0;
      sb_cur     <= '0;
      cdb_idx    <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
      cfg        <= '0;
      tmpl_error <= 1'b0;
      reject_cnt <= '0;
      trng_bits_used <= '0;
    end else begin
      cfg.we <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;

      unique case (state_q)
        RUN: begin
          if (take) begin
            out_valid <= 1'b1;
            out_data  <= hit ? content : in_data;
            out_last  <= in_last;
            word_cnt  <= in_last ? '0 : word_cnt + 1'b1;
            if (hit) begin
              cfg.we   <= 1'b1;
              cfg.idx  <= ptr;
              cfg.data <= content;
              ptr      <= ptr + 1'b1;
              fetched  <= 1'b0;
            end
            if (in_last && (ptr + TIDX_W'(hit)) != TIDX_W'(N_TMPL)) begin
              tmpl_error <= 1'b1;
              ptr        <= '0;
            end
          end else if (in_valid && !locked && hit && !content_ok) begin
            acc     <= '0;
            nbits   <= '0;
            state_q <= DRAW;
          end
        end
        DRAW: if (trng_valid) begin
          acc            <= acc_next;
          nbits          <= nbits + 1'b1;
          trng_bits_used <= trng_bits_used + 1'b1;
          if (nbits + 1'b1 == draw_len) begin
            if (is_key) begin
              fetched <= 1'b1;
              state_q <= RUN;
            end else if ((is_i_sb  && acc_next >= CDB_IDX_W'(I_CDB_SIZE)) ||
                         (!is_i_sb && acc_next >= CDB_IDX_W'(NI_CDB_SIZE))) begin
              reject_cnt <= reject_cnt + 1'b1;     // out of range: draw again
              acc        <= '0;
              nbits      <= '0;
            end else begin
              cdb_idx <= acc_next;
              state_q <= FETCH;
            end
          end
        end
        FETCH: if (cdb_ack) begin
          sb_cur  <= cdb_sbox;
          if (is_ni_fwd) sb_mem[slot] <= cdb_sbox;
          fetched <= 1'b1;
          state_q <= RUN;
        end
        default: state_q <= RUN;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last))
    else $error("genie_manipulator: output word changed while stalled");
  a_no_cfg_when_locked: assert property (@(posedge clk) disable iff (!rst_n)
      $past(locked) |-> !cfg.we)
    else $error("genie_manipulator: template written after lock");
endmodule
