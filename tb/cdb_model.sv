// cdb_model: behavioural model of the cipher data base (CDB).  The real CDB
// holds every optimal 4-bit S-box (1396032) and every optimal involutive
// one (145920); this model holds LIB of each, generated at time zero (affine
// variants of a known optimal S-box, and optimal involutions found by random
// search), and answers index i with entry i mod LIB after a random delay of
// 1..4 clocks.  Request/acknowledge: `req` stays high until `ack`.
module cdb_model
  import suc_pkg::*;
  import suc_tb_pkg::*;
#(
  parameter int LIB = 24
) (
  input  logic                 clk,
  input  logic                 req,
  input  cdb_sel_e             sel,
  input  logic [CDB_IDX_W-1:0] idx,
  output logic                 ack,
  output logic [63:0]          sbox
);
  vt_t lib_opt [LIB];
  vt_t lib_inv [LIB];
  int  wait_cnt;
  int  n_req;

  initial begin
    for (int i = 0; i < LIB; i++) begin
      lib_opt[i] = rand_optimal();
      lib_inv[i] = rand_optimal_invol();
    end
    ack = 1'b0; sbox = '0; wait_cnt = -1; n_req = 0;
  end

  function automatic vt_t lookup(cdb_sel_e s, int i);
    return (s == CDB_INVOLUTIVE) ? lib_inv[i % LIB] : lib_opt[i % LIB];
  endfunction

  always @(posedge clk) begin
    ack <= 1'b0;
    if (req && !ack) begin
      if (wait_cnt < 0) wait_cnt = int'($urandom_range(3, 0));
      else if (wait_cnt == 0) begin
        ack  <= 1'b1;
        sbox <= lookup(sel, int'(idx));
        n_req++;
        wait_cnt = -1;
      end else wait_cnt--;
    end
  end
endmodule
