// tb_i_suc: writes random involutive S-boxes and random key LUTs into an
// I-SUC core, then checks encryption against the reference, that
// decryption (same circuit, reversed keys) returns the plaintext, and the
// 32-clock latency.
module tb_i_suc;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  logic    clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic    start, dec, busy, done;
  block_t  din, dout, x, y, z;
  sl_t     sl;
  ikl_t    kl;
  int checks = 0, failures = 0, cyc = 0, t0;

  i_suc dut (.clk, .rst_n, .cfg, .start, .dec, .din, .busy, .done, .dout);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int idx, logic [15:0] data);
    cfg.we = 1'b1; cfg.idx = TIDX_W'(idx); cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic run(bit d, block_t in, output block_t out);
    start = 1'b1; dec = d; din = in;
    @(posedge clk); #1;
    t0 = cyc;
    start = 1'b0; din = {$urandom, $urandom};
    while (!done) begin @(posedge clk); #1; end
    checks++;
    if (cyc - t0 != 31) begin
      failures++; $display("FAIL latency %0d clocks, expected 32", cyc - t0 + 1);
    end
    out = dout;
  endtask

  initial begin
    cfg = '0; start = 0; dec = 0; din = '0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int s = 0; s < 16; s++) sl[s] = rand_invol();
    for (int j = 0; j < 60; j++) kl[j] = 16'($urandom);
    for (int s = 0; s < 16; s++)
      for (int b = 0; b < 4; b++) wr(T_I_SB + 4*s + b, column(sl[s], b));
    for (int j = 0; j < 60; j++) wr(T_I_KEY + j, kl[j]);
    for (int j = 0; j < T_I_SB; j++) wr(j, 16'($urandom));   // other templates

    for (int n = 0; n < 40; n++) begin
      x = (n == 0) ? '0 : {$urandom, $urandom};
      run(1'b0, x, y);
      checks++;
      if (y !== i_enc(sl, kl, x, 1'b0)) begin
        failures++; $display("FAIL enc x=%h y=%h exp=%h", x, y, i_enc(sl, kl, x, 1'b0));
      end
      run(1'b1, y, z);
      checks++;
      if (z !== x) begin failures++; $display("FAIL dec gave %h expected %h", z, x); end
      checks++;
      if (z !== i_enc(sl, kl, y, 1'b1)) begin failures++; $display("FAIL dec vs reference"); end
      repeat ($urandom_range(2, 0)) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
