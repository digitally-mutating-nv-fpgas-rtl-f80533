// tb_genie_manipulator: streams a bitstream with randomly placed template
// words through the GENIE under random input gaps, output back-pressure and
// an intermittent TRNG.  A scoreboard replays the TRNG bits the GENIE took
// (index draws with redraw on out-of-range values, 16-bit key draws) and
// the data base model, and checks every output word and every template
// write.  It first sends a truncated bitstream (must raise tmpl_error and
// not lock), then a full one (must lock), then checks that a locked GENIE
// accepts nothing.  Stalls, redraws and back-pressure must each occur.
module tb_genie_manipulator;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  localparam int ADDR_W = 12;
  localparam int BS_LEN = 1500;
  localparam int SHORT  = 200;

  logic clk = 0, rst_n = 0, nv_erase_n = 0;
  logic tbl_we; logic [TIDX_W-1:0] tbl_idx; logic [ADDR_W-1:0] tbl_addr;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [15:0] in_data, out_data;
  logic trng_valid, trng_bit, trng_ready;
  logic cdb_req, cdb_ack; cdb_sel_e cdb_sel; logic [CDB_IDX_W-1:0] cdb_idx; logic [63:0] cdb_sbox;
  cfg_wr_t cfg;
  logic locked, tmpl_error; logic [15:0] reject_cnt, trng_bits_used;

  genie_manipulator #(.ADDR_W(ADDR_W)) dut (.*);
  cdb_model #(.LIB(24)) u_cdb (.clk, .req(cdb_req), .sel(cdb_sel), .idx(cdb_idx),
                               .ack(cdb_ack), .sbox(cdb_sbox));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_bp = 0, n_trng_wait = 0, n_cfg = 0, n_bits = 0, n_rej = 0;
  int addr [N_TMPL];
  logic [15:0] bs [BS_LEN];
  bit  trng_q [$];
  int  out_k, role, exp_idx;
  vt_t cur, ni_fwd [16];
  logic [15:0] exp_word, emitted [N_TMPL], cfg_got [N_TMPL];

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // TRNG model and bit recorder
  always @(posedge clk) begin
    if (rst_n && trng_valid && trng_ready) begin trng_q.push_back(trng_bit); n_bits++; end
    if (rst_n && trng_ready && !trng_valid) n_trng_wait++;
    trng_valid <= ($urandom_range(9, 0) < 7);
    trng_bit   <= 1'($urandom);
  end

  function automatic int pop_bits(int n);
    int v = 0;
    for (int i = 0; i < n; i++) v = (v << 1) | int'(trng_q.pop_front());
    return v;
  endfunction

  function automatic logic [15:0] expected_template(int r);
    int b = r % 4, slot = (r / 4) % 16, v, w, lim;
    if ((r < T_NI_INV) || (r >= T_I_SB && r < T_I_KEY)) begin
      if (b == 0) begin
        w   = (r < T_NI_INV) ? NI_IDX_W : I_IDX_W;
        lim = (r < T_NI_INV) ? NI_CDB_SIZE : I_CDB_SIZE;
        do begin v = pop_bits(w); if (v >= lim) n_rej++; end while (v >= lim);
        cur = u_cdb.lookup((r < T_NI_INV) ? CDB_OPTIMAL : CDB_INVOLUTIVE, v);
        if (r < T_NI_INV) ni_fwd[slot] = cur;
      end
      return column(cur, b);
    end else if (r < T_NI_KEY) begin
      return column(inv_vt(ni_fwd[slot]), b);
    end else begin
      return 16'(pop_bits(16));
    end
  endfunction

  // output scoreboard
  always @(posedge clk) begin
    if (out_valid && !out_ready) n_bp++;
    if (in_valid && !in_ready && !locked) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      if (role < N_TMPL && out_k == addr[role]) begin
        exp_word = expected_template(role);
        emitted[role] = exp_word;
        role++;
      end else exp_word = bs[out_k];
      checks++;
      if (out_data !== exp_word) begin
        failures++;
        $display("FAIL word %0d: got %h expected %h (template %0d)", out_k, out_data, exp_word, role - 1);
      end
      out_k++;
      if (out_last) begin out_k = 0; role = 0; end
    end
    if (rst_n && cfg.we) begin
      n_cfg++;
      checks++;
      if (cfg.idx != TIDX_W'(exp_idx)) begin
        failures++;
        $display("FAIL cfg write idx %0d, expected idx %0d", cfg.idx, exp_idx);
      end
      cfg_got[exp_idx % N_TMPL] = cfg.data;
      exp_idx++;
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(3, 0) != 0);

  task automatic send(int len);
    for (int k = 0; k < len; k++) begin
      while ($urandom_range(4, 0) == 0) begin in_valid = 0; @(posedge clk); #1; end
      in_valid = 1; in_data = bs[k]; in_last = (k == len - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
      in_valid = 0;
    end
  endtask

  initial begin
    int need, left;
    tbl_we = 0; tbl_idx = '0; tbl_addr = '0; in_valid = 0; in_data = '0; in_last = 0;
    out_k = 0; role = 0; exp_idx = 0;
    // template locations: a random ascending sample of word addresses
    need = N_TMPL; left = BS_LEN;
    for (int w = 0; w < BS_LEN; w++) begin
      if ($urandom_range(left - 1, 0) < need) begin addr[N_TMPL - need] = w; need--; end
      left--;
      bs[w] = 16'($urandom);
    end
    repeat (3) @(posedge clk); #1; rst_n = 1; nv_erase_n = 1;
    for (int i = 0; i < N_TMPL; i++) begin
      tbl_we = 1; tbl_idx = TIDX_W'(i); tbl_addr = ADDR_W'(addr[i]);
      @(posedge clk); #1;
    end
    tbl_we = 0;

    // 1: truncated bitstream
    send(SHORT);
    repeat (20) @(posedge clk); #1;
    checks++;
    if (!tmpl_error || locked) begin failures++; $display("FAIL truncated load: error=%b locked=%b", tmpl_error, locked); end
    exp_idx = 0;

    // 2: complete bitstream
    send(BS_LEN);
    repeat (20) @(posedge clk); #1;
    checks++;
    if (!locked) begin failures++; $display("FAIL not locked after full load"); end
    checks++;
    if (exp_idx != N_TMPL) begin failures++; $display("FAIL %0d template writes in full load", exp_idx); end
    for (int i = 0; i < N_TMPL; i++) begin
      checks++;
      if (cfg_got[i] !== emitted[i]) begin
        failures++; $display("FAIL template %0d written %h, emitted %h", i, cfg_got[i], emitted[i]);
      end
    end
    checks++;
    if (int'(trng_bits_used) != n_bits || trng_q.size() != 0) begin
      failures++; $display("FAIL TRNG bits: dut %0d tb %0d left %0d", trng_bits_used, n_bits, trng_q.size());
    end
    checks++;
    if (int'(reject_cnt) != n_rej) begin failures++; $display("FAIL redraws dut %0d tb %0d", reject_cnt, n_rej); end

    // 3: locked: nothing is accepted, no template is written
    n_cfg = 0;
    tbl_we = 1; tbl_idx = '0; tbl_addr = '0;
    in_valid = 1; in_data = 16'h1234; in_last = 1;
    repeat (50) begin
      @(posedge clk);
      checks++;
      if (in_ready) begin failures++; $display("FAIL locked GENIE accepted a word"); end
    end
    #1 in_valid = 0; tbl_we = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_cfg != 0 || out_valid) begin failures++; $display("FAIL activity after lock"); end
    // a reset does not undo the lock
    rst_n = 0; @(posedge clk); #1 rst_n = 1; @(posedge clk);
    checks++;
    if (!locked) begin failures++; $display("FAIL reset cleared the lock"); end

    $display("mechanisms: input stalls=%0d back-pressure=%0d TRNG waits=%0d redraws=%0d TRNG bits=%0d",
             n_stall, n_bp, n_trng_wait, n_rej, n_bits);
    checks++;
    if (n_stall == 0 || n_bp == 0 || n_trng_wait == 0 || n_rej == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
