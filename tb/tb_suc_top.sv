// tb_suc_top: end-to-end test of the SUC subsystem at its default
// parameters, with two devices that receive the same bitstream and the same
// template location table but have their own TRNG, as in volume
// personalisation.
//   1. Before personalisation a cipher request must be refused.
//   2. Both devices are personalised; the template words are read back out
//      of each personalised bitstream BS'_u: every NI-SUC S-box must be an
//      optimal 4-bit S-box, every I-SUC S-box an optimal involution, the
//      NI-SUC decryption templates the inverses of the forward ones, all
//      other words unchanged, and the two devices' ciphers different.
//   3. Enrolment: a trusted party records challenge/response pairs X/Y
//      from device 0 with both ciphers (checked against the reference
//      model built from the read-back templates, 32-clock latency).
//   4. Identification: device 0 decrypts Y back to X; the other device, a
//      would-be clone, does not.
// Every mechanism (refusal when unpersonalised and when busy, input stall,
// TRNG wait, index redraw, lock, the four cipher operations, clone
// rejection) is counted and must happen at least once.
module tb_suc_top;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  localparam int ADDR_W = 20;     // default of suc_top
  localparam int BS_LEN = 2000;
  localparam int NCH    = 6;      // challenges per cipher

  logic clk = 0, rst_n = 0, nv_erase_n = 0;
  logic tbl_we; logic [TIDX_W-1:0] tbl_idx; logic [ADDR_W-1:0] tbl_addr;
  logic bs_in_valid [2], bs_in_ready [2], bs_in_last [2];
  logic [15:0] bs_in_data [2], bs_out_data [2];
  logic bs_out_valid [2], bs_out_ready [2], bs_out_last [2];
  logic trng_valid [2], trng_bit [2], trng_ready [2];
  logic cdb_req [2], cdb_ack [2]; cdb_sel_e cdb_sel [2];
  logic [CDB_IDX_W-1:0] cdb_idx [2]; logic [63:0] cdb_sbox [2];
  logic op_start [2], op_cipher, op_dec, op_busy [2], op_done [2], op_refused [2];
  block_t op_din, op_dout [2];
  logic locked [2], tmpl_error [2]; logic [15:0] reject_cnt [2], trng_bits_used [2];

  for (genvar d = 0; d < 2; d++) begin : g_dev
    suc_top dut (
      .clk, .rst_n, .nv_erase_n, .tbl_we, .tbl_idx, .tbl_addr,
      .bs_in_valid(bs_in_valid[d]), .bs_in_ready(bs_in_ready[d]), .bs_in_data(bs_in_data[d]),
      .bs_in_last(bs_in_last[d]), .bs_out_valid(bs_out_valid[d]), .bs_out_ready(bs_out_ready[d]),
      .bs_out_data(bs_out_data[d]), .bs_out_last(bs_out_last[d]),
      .trng_valid(trng_valid[d]), .trng_bit(trng_bit[d]), .trng_ready(trng_ready[d]),
      .cdb_req(cdb_req[d]), .cdb_sel(cdb_sel[d]), .cdb_idx(cdb_idx[d]), .cdb_ack(cdb_ack[d]),
      .cdb_sbox(cdb_sbox[d]),
      .op_start(op_start[d]), .op_cipher, .op_dec, .op_din, .op_busy(op_busy[d]),
      .op_done(op_done[d]), .op_dout(op_dout[d]), .op_refused(op_refused[d]),
      .locked(locked[d]), .tmpl_error(tmpl_error[d]), .reject_cnt(reject_cnt[d]),
      .trng_bits_used(trng_bits_used[d]));
    cdb_model #(.LIB(16)) u_cdb (.clk, .req(cdb_req[d]), .sel(cdb_sel[d]), .idx(cdb_idx[d]),
                                 .ack(cdb_ack[d]), .sbox(cdb_sbox[d]));
    always @(posedge clk) begin
      trng_valid[d]   <= ($urandom_range(9, 0) < 8);
      trng_bit[d]     <= 1'($urandom);
      bs_out_ready[d] <= ($urandom_range(7, 0) != 0);
    end
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_refuse_unpers = 0, n_refuse_busy = 0, n_stall = 0, n_trng_wait = 0, n_cdb = 0;
  int n_ni_enc = 0, n_ni_dec = 0, n_i_enc = 0, n_i_dec = 0, n_clone_rej = 0;
  int addr [N_TMPL];
  bit is_tmpl [BS_LEN];
  logic [15:0] bs [BS_LEN];
  logic [15:0] bsu [2][BS_LEN];
  int out_k [2];
  sl_t sl_ni [2], sl_ni_inv [2], sl_i [2];
  nikl_t kl_ni [2];
  ikl_t  kl_i [2];
  block_t xs [NCH], ys_ni [NCH], ys_i [NCH];

  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int d = 0; d < 2; d++) begin
      if (rst_n && bs_out_valid[d] && bs_out_ready[d]) begin
        bsu[d][out_k[d] % BS_LEN] = bs_out_data[d];
        out_k[d]++;
      end
      if (bs_in_valid[d] && !bs_in_ready[d]) n_stall++;
      if (trng_ready[d] && !trng_valid[d]) n_trng_wait++;
      if (cdb_ack[d]) n_cdb++;
    end
  end

  task automatic send(int d);
    for (int k = 0; k < BS_LEN; k++) begin
      bs_in_valid[d] = 1; bs_in_data[d] = bs[k]; bs_in_last[d] = (k == BS_LEN - 1);
      @(posedge clk);
      while (!bs_in_ready[d]) @(posedge clk);
      #1;
      bs_in_valid[d] = 0;
    end
  endtask

  // one cipher request on device d; returns the result, checks latency
  task automatic op(int d, bit cipher, bit dec, block_t x, output block_t y);
    int t0;
    op_cipher = cipher; op_dec = dec; op_din = x; op_start[d] = 1;
    @(posedge clk); #1;
    op_start[d] = 0; t0 = cyc;
    // a second request while busy must be refused
    op_start[d] = 1; #1;
    if (op_refused[d]) n_refuse_busy++;
    checks++;
    if (!op_refused[d]) begin failures++; $display("FAIL request while busy not refused"); end
    @(posedge clk); #1; op_start[d] = 0;
    while (!op_done[d]) begin @(posedge clk); #1; end
    checks++;
    if (cyc - t0 != 31) begin failures++; $display("FAIL latency %0d", cyc - t0 + 1); end
    y = op_dout[d];
    if (!cipher && !dec) n_ni_enc++;
    if (!cipher &&  dec) n_ni_dec++;
    if ( cipher && !dec) n_i_enc++;
    if ( cipher &&  dec) n_i_dec++;
  endtask

  function automatic void extract(int d);
    for (int s = 0; s < 16; s++) begin
      sl_ni[d][s]     = from_columns(bsu[d][addr[T_NI_FWD+4*s]], bsu[d][addr[T_NI_FWD+4*s+1]],
                                     bsu[d][addr[T_NI_FWD+4*s+2]], bsu[d][addr[T_NI_FWD+4*s+3]]);
      sl_ni_inv[d][s] = from_columns(bsu[d][addr[T_NI_INV+4*s]], bsu[d][addr[T_NI_INV+4*s+1]],
                                     bsu[d][addr[T_NI_INV+4*s+2]], bsu[d][addr[T_NI_INV+4*s+3]]);
      sl_i[d][s]      = from_columns(bsu[d][addr[T_I_SB+4*s]], bsu[d][addr[T_I_SB+4*s+1]],
                                     bsu[d][addr[T_I_SB+4*s+2]], bsu[d][addr[T_I_SB+4*s+3]]);
    end
    for (int j = 0; j < 64; j++) kl_ni[d][j] = bsu[d][addr[T_NI_KEY + j]];
    for (int j = 0; j < 60; j++) kl_i[d][j]  = bsu[d][addr[T_I_KEY + j]];
  endfunction

  initial begin
    int need, left, nd;
    block_t y, z;
    tbl_we = 0; tbl_idx = '0; tbl_addr = '0; op_cipher = 0; op_dec = 0; op_din = '0;
    for (int d = 0; d < 2; d++) begin
      bs_in_valid[d] = 0; bs_in_data[d] = '0; bs_in_last[d] = 0; op_start[d] = 0; out_k[d] = 0;
    end
    need = N_TMPL; left = BS_LEN;
    for (int w = 0; w < BS_LEN; w++) begin
      is_tmpl[w] = 0;
      if ($urandom_range(left - 1, 0) < need) begin addr[N_TMPL - need] = w; is_tmpl[w] = 1; need--; end
      left--;
      bs[w] = 16'($urandom);
    end
    repeat (3) @(posedge clk); #1; rst_n = 1; nv_erase_n = 1;

    // 1: not yet personalised
    op_start[0] = 1; #1;
    checks++;
    if (op_refused[0]) n_refuse_unpers++; else begin failures++; $display("FAIL unpersonalised request accepted"); end
    @(posedge clk); #1; op_start[0] = 0;

    // 2: personalisation of both devices
    for (int i = 0; i < N_TMPL; i++) begin
      tbl_we = 1; tbl_idx = TIDX_W'(i); tbl_addr = ADDR_W'(addr[i]); @(posedge clk); #1;
    end
    tbl_we = 0;
    fork send(0); send(1); join
    repeat (20) @(posedge clk); #1;
    for (int d = 0; d < 2; d++) begin
      checks++;
      if (!locked[d] || tmpl_error[d] || out_k[d] != BS_LEN) begin
        failures++; $display("FAIL device %0d: locked=%b error=%b words=%0d", d, locked[d], tmpl_error[d], out_k[d]);
      end
      for (int w = 0; w < BS_LEN; w++) if (!is_tmpl[w]) begin
        checks++;
        if (bsu[d][w] !== bs[w]) begin failures++; $display("FAIL device %0d word %0d changed", d, w); end
      end
      extract(d);
      for (int s = 0; s < 16; s++) begin
        checks += 3;
        if (!is_optimal(sl_ni[d][s])) begin failures++; $display("FAIL NI S-box %0d not optimal", s); end
        if (sl_ni_inv[d][s] !== inv_vt(sl_ni[d][s])) begin failures++; $display("FAIL NI inverse S-box %0d", s); end
        if (!is_optimal(sl_i[d][s]) || !is_invol(sl_i[d][s])) begin
          failures++; $display("FAIL I S-box %0d not an optimal involution", s);
        end
      end
      $display("device %0d: %0d TRNG bits, %0d index redraws", d, trng_bits_used[d], reject_cnt[d]);
    end
    nd = 0;
    for (int w = 0; w < BS_LEN; w++) if (bsu[0][w] != bsu[1][w]) nd++;
    checks++;
    if (nd == 0) begin failures++; $display("FAIL the two devices got the same cipher"); end

    // 3: enrolment on device 0
    for (int i = 0; i < NCH; i++) begin
      xs[i] = {$urandom, $urandom};
      op(0, 1'b0, 1'b0, xs[i], ys_ni[i]);
      checks++;
      if (ys_ni[i] !== ni_enc(sl_ni[0], kl_ni[0], xs[i])) begin failures++; $display("FAIL NI-SUC response"); end
      op(0, 1'b1, 1'b0, xs[i], ys_i[i]);
      checks++;
      if (ys_i[i] !== i_enc(sl_i[0], kl_i[0], xs[i], 1'b0)) begin failures++; $display("FAIL I-SUC response"); end
    end

    // 4: identification of device 0 and of the clone
    for (int i = 0; i < NCH; i++) begin
      op(0, 1'b0, 1'b1, ys_ni[i], z);
      checks++; if (z !== xs[i]) begin failures++; $display("FAIL NI-SUC identification"); end
      op(0, 1'b1, 1'b1, ys_i[i], z);
      checks++; if (z !== xs[i]) begin failures++; $display("FAIL I-SUC identification"); end
      op(1, 1'b0, 1'b1, ys_ni[i], z);
      checks++; if (z !== xs[i]) n_clone_rej++; else begin failures++; $display("FAIL clone accepted (NI)"); end
      op(1, 1'b1, 1'b1, ys_i[i], z);
      checks++; if (z !== xs[i]) n_clone_rej++; else begin failures++; $display("FAIL clone accepted (I)"); end
    end

    $display("mechanisms: refused-unpersonalised=%0d refused-busy=%0d stalls=%0d TRNG-waits=%0d CDB-fetches=%0d redraws=%0d/%0d locks=%0d NI-enc=%0d NI-dec=%0d I-enc=%0d I-dec=%0d clone-rejections=%0d",
             n_refuse_unpers, n_refuse_busy, n_stall, n_trng_wait, n_cdb, reject_cnt[0], reject_cnt[1],
             int'(locked[0]) + int'(locked[1]), n_ni_enc, n_ni_dec, n_i_enc, n_i_dec, n_clone_rej);
    checks++;
    if (n_refuse_unpers == 0 || n_refuse_busy == 0 || n_stall == 0 || n_trng_wait == 0 || n_cdb == 0 ||
        (reject_cnt[0] == 0 && reject_cnt[1] == 0) || n_ni_enc == 0 || n_ni_dec == 0 || n_i_enc == 0 ||
        n_i_dec == 0 || n_clone_rej == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
