// tx_encrypt: TX ENCRYPT, placed between the 64b/66b encoder and the
// scrambler. Blocks from the encoder pass INSERT (which may swap one idle
// block for a Cipher_ON/Cipher_OFF block), then CIPHER_OP_TX; CAPTURE watches
// the stream between the two and switches CIPHER_OP_TX and the TX keystream
// generators on after a Cipher_ON block and off after a Cipher_OFF block.
// While off, blocks pass unchanged. Latency: two clocks (INSERT register,
// output register). The keystream for a block is ks_data/ks_sync in the
// cycle the block leaves INSERT; ks_adv then steps the generators.
module tx_encrypt
  import physec_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  pcs_blk_t         in,         // from the 64b/66b encoder
  output pcs_blk_t         out,        // to the scrambler
  // management
  input  logic             ins_req,
  input  mgmt_msg_e        ins_msg,
  output logic             ins_ready,
  output logic             ins_done,
  output logic             active,
  // keystream
  input  logic [PAY_W-1:0] ks_data,
  input  logic             ks_sync,
  output logic             ks_adv
);
  pcs_blk_t         ins_out;
  mgmt_msg_e        cap_msg;
  logic [BLK_W-1:0] enc;

  mgmt_insert u_insert (
    .clk, .rst_n, .in, .out(ins_out), .req(ins_req), .req_msg(ins_msg),
    .ready(ins_ready), .done(ins_done));

  cipher_capture u_capture (
    .clk, .rst_n, .blk(ins_out), .active, .ks_adv, .msg(cap_msg));

  cipher_op u_cipher (
    .en(active && ins_out.valid), .d_in(ins_out.data), .ks_data, .ks_sync,
    .d_out(enc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= '{valid: ins_out.valid, data: enc};
  end
endmodule
