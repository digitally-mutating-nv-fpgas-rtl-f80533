// suc_top: the SUC subsystem of a non-volatile SoC FPGA: the manipulating
// GENIE and the two cipher templates the paper proposes, NI-SUC and I-SUC.
//
// Personalisation: after power-on the clear bitstream BS' (from the device's
// bitstream decryption engine, outside this block) streams through the
// GENIE, which fills the template LUTs of both ciphers with TRNG-chosen
// S-boxes from the cipher data base and TRNG key bits, emits BS'_u to the
// configuration memory and then locks itself.  The TRNG, the cipher data
// base, the decryption engine and the configuration memory are outside; their
// signals are ports of this block.
//
// Operation: a request on `op_start` (accepted only when the device is
// personalised and both ciphers are idle; otherwise `op_refused` pulses)
// selects a cipher with `op_cipher` (0 = NI-SUC, 1 = I-SUC) and a direction
// with `op_dec`.  `op_done` rises 32 clock edges after an accepted start and
// holds `op_dout` until the next request.
module suc_top
  import suc_pkg::*;
#(
  parameter int unsigned ADDR_W = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              nv_erase_n,
  // template location table (bitstream manipulation tool)
  input  logic              tbl_we,
  input  logic [TIDX_W-1:0] tbl_idx,
  input  logic [ADDR_W-1:0] tbl_addr,
  // BS' in, BS'_u out
  input  logic              bs_in_valid,
  output logic              bs_in_ready,
  input  logic [15:0]       bs_in_data,
  input  logic              bs_in_last,
  output logic              bs_out_valid,
  input  logic              bs_out_ready,
  output logic [15:0]       bs_out_data,
  output logic              bs_out_last,
  // TRNG
  input  logic              trng_valid,
  input  logic              trng_bit,
  output logic              trng_ready,
  // cipher data base
  output logic                 cdb_req,
  output cdb_sel_e             cdb_sel,
  output logic [CDB_IDX_W-1:0] cdb_idx,
  input  logic                 cdb_ack,
  input  logic [63:0]          cdb_sbox,
  // cipher requests
  input  logic              op_start,
  input  logic              op_cipher,
  input  logic              op_dec,
  input  block_t            op_din,
  output logic              op_busy,
  output logic              op_done,
  output block_t            op_dout,
  output logic              op_refused,
  // status
  output logic              locked,
  output logic              tmpl_error,
  output logic [15:0]       reject_cnt,
  output logic [15:0]       trng_bits_used
);
  cfg_wr_t cfg;
  logic    ni_start, i_start, ni_busy, i_busy, ni_done, i_done, sel_q, accept;
  block_t  ni_dout, i_dout;

  genie_manipulator #(.ADDR_W(ADDR_W)) u_genie (
    .clk, .rst_n, .nv_erase_n,
    .tbl_we, .tbl_idx, .tbl_addr,
    .in_valid(bs_in_valid), .in_ready(bs_in_ready), .in_data(bs_in_data), .in_last(bs_in_last),
    .out_valid(bs_out_valid), .out_ready(bs_out_ready), .out_data(bs_out_data), .out_last(bs_out_last),
    .trng_valid, .trng_bit, .trng_ready,
    .cdb_req, .cdb_sel, .cdb_idx, .cdb_ack, .cdb_sbox,
    .cfg, .locked, .tmpl_error, .reject_cnt, .trng_bits_used
  );

  always_comb begin
    accept   = op_start && locked && !ni_busy && !i_busy;
    ni_start = accept && !op_cipher;
    i_start  = accept &&  op_cipher;
  end

  ni_suc u_ni (.clk, .rst_n, .cfg, .start(ni_start), .dec(op_dec), .din(op_din),
               .busy(ni_busy), .done(ni_done), .dout(ni_dout));
  i_suc  u_i  (.clk, .rst_n, .cfg, .start(i_start),  .dec(op_dec), .din(op_din),
               .busy(i_busy),  .done(i_done),  .dout(i_dout));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sel_q <= 1'b0;
    else if (accept) sel_q <= op_cipher;
  end

  always_comb begin
    op_busy    = ni_busy || i_busy;
    op_done    = sel_q ? i_done : ni_done;
    op_dout    = sel_q ? i_dout : ni_dout;
    op_refused = op_start && !accept;
  end
endmodule
