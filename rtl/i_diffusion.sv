// i_diffusion: the involutive diffusion layer P of I-SUC followed by the
// round-key XOR.  Sum = XOR of the 16 S-box output nibbles; each output
// nibble is Out_i = S_i ^ Sum and then O_i = Out_i ^ k_i.  Because the
// number of nibbles is even, P(P(x)) = x.  The XOR of the key symbols is
// expected to be zero (guaranteed by rksa_i); then P(x ^ K) = P(x) ^ K.
// Combinational.  Entirely as in the paper.
module i_diffusion
  import suc_pkg::*;
(
  input  block_t s_out,
  input  block_t key,
  output block_t o
);
  logic [3:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < NIBBLES; i++) sum ^= s_out[4*i +: 4];
    for (int i = 0; i < NIBBLES; i++) o[4*i +: 4] = s_out[4*i +: 4] ^ sum ^ key[4*i +: 4];
  end
endmodule
