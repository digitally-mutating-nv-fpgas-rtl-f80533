// tb_rksa_ni: fills the 64 key LUTs with random truth tables and checks all
// 32 round keys against the reference schedule; also checks that the key
// bits follow the LUT contents (a one-hot truth table gives a one-hot key
// bit pattern over the counter values).
module tb_rksa_ni;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  lut_cfg_t [63:0] cfg;
  logic [4:0]      cnt;
  block_t          key;
  nikl_t           kl;
  int checks = 0, failures = 0;

  rksa_ni dut (.cfg, .cnt, .key);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 8; n++) begin
      for (int j = 0; j < 64; j++) begin
        kl[j]  = (n == 0) ? 16'(1 << (j % 16)) : 16'($urandom);
        cfg[j] = kl[j];
      end
      for (int i = 0; i < 32; i++) begin
        cnt = 5'(i);
        #1;
        checks++;
        if (key !== ni_key(kl, i)) begin
          failures++;
          $display("FAIL set %0d round %0d key=%h exp=%h", n, i, key, ni_key(kl, i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
