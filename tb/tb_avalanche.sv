// tb_avalanche: the avalanche evaluation of the two cipher classes.
// NSUC devices are personalised one after another (a blank device each
// time: nv_erase_n, then a bitstream made only of template words).  For
// each device NMSG random messages are encrypted with both ciphers, once as
// they are and once with one random bit flipped.  The Hamming distance of
// the two results is accumulated, and so is the distance of the round
// register after every round (read hierarchically), giving the output
// distance as a function of the number of rounds.
// Checks: every full-round result matches the reference model; the mean
// full-round distance is about half the block (30..34 bits) for both
// ciphers and for every device; I-SUC is already at 30..34 after 3 rounds
// and NI-SUC after 7, and I-SUC diffuses faster than NI-SUC in round 2.
// The S-box library of the data base model is small (LIB entries), so the
// devices draw from a far smaller cipher class than a real device.
module tb_avalanche;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  localparam int NSUC = 1000;
  localparam int NMSG = 100;

  logic clk = 0, rst_n = 0, nv_erase_n = 0;
  logic tbl_we; logic [TIDX_W-1:0] tbl_idx; logic [19:0] tbl_addr;
  logic bs_in_valid, bs_in_ready, bs_in_last, bs_out_valid, bs_out_ready, bs_out_last;
  logic [15:0] bs_in_data, bs_out_data;
  logic trng_valid, trng_bit, trng_ready;
  logic cdb_req, cdb_ack; cdb_sel_e cdb_sel; logic [CDB_IDX_W-1:0] cdb_idx; logic [63:0] cdb_sbox;
  logic op_start, op_cipher, op_dec, op_busy, op_done, op_refused;
  block_t op_din, op_dout;
  logic locked, tmpl_error; logic [15:0] reject_cnt, trng_bits_used;

  suc_top dut (.*);
  cdb_model #(.LIB(128)) u_cdb (.clk, .req(cdb_req), .sel(cdb_sel), .idx(cdb_idx),
                               .ack(cdb_ack), .sbox(cdb_sbox));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    trng_valid <= 1'b1;
    trng_bit   <= 1'($urandom);
  end

  int checks = 0, failures = 0;
  logic [15:0] bsu [N_TMPL];
  int nout;
  real hd_round [2][33];     // [cipher][round] summed distances
  real hd_full [2], dev_sum [2], dev_min [2], dev_max [2];
  block_t trace_a [33], trace_b [33];

  always @(posedge clk) if (rst_n && bs_out_valid && bs_out_ready) begin bsu[nout] = bs_out_data; nout++; end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one operation; the round register after each clock goes to tr[]
  task automatic run(bit cipher, block_t x, output block_t y, output block_t tr [33]);
    int r;
    op_cipher = cipher; op_dec = 1'b0; op_din = x; op_start = 1;
    @(posedge clk); #1;
    op_start = 0;
    r = 0;
    while (!op_done) begin
      @(posedge clk); #1;
      r++;
      tr[r] = cipher ? dut.u_i.state_r : dut.u_ni.state_r;
    end
    y = op_dout;
  endtask

  function automatic int hd(block_t a, block_t b); return $countones(a ^ b); endfunction

  initial begin
    block_t x, xf, ya, yb;
    sl_t sl_ni, sl_i;
    nikl_t kl_ni;
    ikl_t kl_i;
    real m;
    tbl_we = 0; tbl_idx = '0; tbl_addr = '0; bs_in_valid = 0; bs_in_data = '0; bs_in_last = 0;
    bs_out_ready = 1; op_start = 0; op_cipher = 0; op_dec = 0; op_din = '0;
    for (int c = 0; c < 2; c++) begin
      hd_full[c] = 0; dev_min[c] = 64.0; dev_max[c] = 0.0;
      for (int r = 0; r < 33; r++) hd_round[c][r] = 0;
    end
    for (int d = 0; d < NSUC; d++) begin
      // a new, blank device
      rst_n = 0; nv_erase_n = 0; nout = 0;
      repeat (2) @(posedge clk); #1; rst_n = 1; nv_erase_n = 1;
      for (int i = 0; i < N_TMPL; i++) begin
        tbl_we = 1; tbl_idx = TIDX_W'(i); tbl_addr = 20'(i); @(posedge clk); #1;
      end
      tbl_we = 0;
      for (int k = 0; k < N_TMPL; k++) begin
        bs_in_valid = 1; bs_in_data = '0; bs_in_last = (k == N_TMPL - 1);
        @(posedge clk);
        while (!bs_in_ready) @(posedge clk);
        #1;
      end
      bs_in_valid = 0;
      repeat (4) @(posedge clk); #1;
      checks++;
      if (!locked) begin failures++; $display("FAIL device %0d not personalised", d); end
      for (int s = 0; s < 16; s++) begin
        sl_ni[s] = from_columns(bsu[4*s], bsu[4*s+1], bsu[4*s+2], bsu[4*s+3]);
        sl_i[s]  = from_columns(bsu[T_I_SB+4*s], bsu[T_I_SB+4*s+1], bsu[T_I_SB+4*s+2], bsu[T_I_SB+4*s+3]);
      end
      for (int j = 0; j < 64; j++) kl_ni[j] = bsu[T_NI_KEY + j];
      for (int j = 0; j < 60; j++) kl_i[j]  = bsu[T_I_KEY + j];

      for (int c = 0; c < 2; c++) begin
        dev_sum[c] = 0;
        for (int n = 0; n < NMSG; n++) begin
          x  = {$urandom, $urandom};
          xf = x ^ (64'd1 << $urandom_range(63, 0));
          run(c[0], x, ya, trace_a);
          run(c[0], xf, yb, trace_b);
          if (n < 4) begin
            checks++;
            if (ya !== (c ? i_enc(sl_i, kl_i, x, 1'b0) : ni_enc(sl_ni, kl_ni, x))) begin
              failures++; $display("FAIL device %0d cipher %0d result", d, c);
            end
          end
          for (int r = 1; r <= 31; r++) hd_round[c][r] += hd(trace_a[r], trace_b[r]);
          hd_full[c] += hd(ya, yb);
          dev_sum[c] += hd(ya, yb);
        end
        m = dev_sum[c] / NMSG;
        if (m < dev_min[c]) dev_min[c] = m;
        if (m > dev_max[c]) dev_max[c] = m;
        checks++;
        if (m < 30.0 || m > 34.0) begin
          failures++; $display("FAIL device %0d %s mean distance %.2f", d, c ? "I-SUC" : "NI-SUC", m);
        end
      end
    end

    for (int c = 0; c < 2; c++) begin
      $write("%s mean output distance by round:", c ? "I-SUC " : "NI-SUC");
      for (int r = 1; r <= 8; r++) $write(" r%0d=%.1f", r, hd_round[c][r] / (NSUC * NMSG));
      $display("  full=%.2f, per-device mean %.2f..%.2f", hd_full[c] / (NSUC * NMSG), dev_min[c], dev_max[c]);
    end
    checks++;
    m = hd_round[1][3] / (NSUC * NMSG);
    if (m < 30.0 || m > 34.0) begin failures++; $display("FAIL I-SUC after 3 rounds: %.2f", m); end
    checks++;
    m = hd_round[0][7] / (NSUC * NMSG);
    if (m < 30.0 || m > 34.0) begin failures++; $display("FAIL NI-SUC after 7 rounds: %.2f", m); end
    checks++;
    if (hd_round[1][2] <= hd_round[0][2]) begin failures++; $display("FAIL I-SUC not faster than NI-SUC"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
