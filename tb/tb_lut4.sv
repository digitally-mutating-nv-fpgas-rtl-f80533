// tb_lut4: checks the 4-input LUT against its truth table for random
// configurations and all 16 inputs.
module tb_lut4;
  logic [15:0] cfg;
  logic [3:0]  x;
  logic        y;
  int checks = 0, failures = 0;

  lut4 dut (.cfg, .x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 64; n++) begin
      cfg = (n == 0) ? 16'h0001 : (n == 1) ? 16'h8000 : 16'($urandom);
      for (int i = 0; i < 16; i++) begin
        x = 4'(i);
        #1;
        checks++;
        if (y !== ((cfg >> i) & 16'h1) != 0) begin
          failures++;
          $display("FAIL cfg=%h x=%0d y=%b", cfg, i, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
