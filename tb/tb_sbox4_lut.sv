// tb_sbox4_lut: loads random bijections (and optimal S-boxes) into the
// four-LUT S-box template as truth-table columns and checks every input.
module tb_sbox4_lut;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  sbox_cfg_t  cfg;
  logic [3:0] x, y;
  vt_t        t;
  int checks = 0, failures = 0;

  sbox4_lut dut (.cfg, .x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 40; n++) begin
      t = (n == 0) ? PRESENT_VT : (n % 2) ? rand_perm() : rand_optimal();
      for (int b = 0; b < 4; b++) cfg[b] = column(t, b);
      for (int i = 0; i < 16; i++) begin
        x = 4'(i);
        #1;
        checks++;
        if (y !== sv(t, i)) begin
          failures++;
          $display("FAIL sbox=%h x=%0d y=%h exp=%h", t, i, y, sv(t, i));
        end
      end
    end
    // the generator of optimal S-boxes must give optimal ones
    checks++;
    if (!is_optimal(PRESENT_VT) || !is_optimal(rand_optimal())) begin
      failures++;
      $display("FAIL optimal S-box generator");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
