// tb_i_diffusion: compares the diffusion layer with the reference, checks
// that P is an involution and that it commutes with the addition of a key
// whose symbols XOR to zero (the theorem behind I-SUC decryption).
module tb_i_diffusion;
  import suc_pkg::*;
  import suc_tb_pkg::*;
  block_t s_out, key, o, o2, o3, k0;
  logic [3:0] x;
  int checks = 0, failures = 0;

  i_diffusion dut  (.s_out(s_out), .key(key), .o(o));
  i_diffusion dut2 (.s_out(o),     .key(k0),  .o(o2));   // P(P(x) ^ key)
  i_diffusion dut3 (.s_out(s_out ^ key), .key(k0), .o(o3)); // P(x ^ key)

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    k0 = '0;
    for (int n = 0; n < 200; n++) begin
      s_out = {$urandom, $urandom};
      key   = {$urandom, $urandom};
      if (n % 2) begin            // zero-sum key
        x = '0;
        for (int s = 1; s < 16; s++) x ^= key[4*s +: 4];
        key[3:0] = x;
      end
      if (n < 20) key = '0;
      #1;
      checks++;
      if (o !== (diffuse(s_out) ^ key)) begin
        failures++; $display("FAIL o=%h exp=%h", o, diffuse(s_out) ^ key);
      end
      if (key == '0) begin
        checks++;
        if (o2 !== s_out) begin failures++; $display("FAIL not involutive"); end
      end
      if (n % 2) begin
        checks++;
        if (o3 !== o) begin failures++; $display("FAIL P does not commute with key"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
