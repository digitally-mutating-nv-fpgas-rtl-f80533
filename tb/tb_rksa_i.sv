// tb_rksa_i: random key LUT contents; checks all 31 round keys against the
// reference schedule and that the XOR of the 16 key symbols is zero.
module tb_rksa_i;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  lut_cfg_t [59:0] cfg;
  logic [4:0]      cnt;
  block_t          key;
  ikl_t            kl;
  logic [3:0]      x;
  int checks = 0, failures = 0;

  rksa_i dut (.cfg, .cnt, .key);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 8; n++) begin
      for (int j = 0; j < 60; j++) begin kl[j] = 16'($urandom); cfg[j] = kl[j]; end
      for (int r = 0; r < 31; r++) begin
        cnt = 5'(r);
        #1;
        checks++;
        if (key !== i_key(kl, r)) begin
          failures++;
          $display("FAIL set %0d round %0d key=%h exp=%h", n, r, key, i_key(kl, r));
        end
        x = '0;
        for (int s = 0; s < 16; s++) x ^= key[4*s +: 4];
        checks++;
        if (x != 4'h0) begin failures++; $display("FAIL key symbol XOR %h", x); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
