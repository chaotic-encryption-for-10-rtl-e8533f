// rx_decrypt: RX DECRYPT, placed between the descrambler and the 64b/66b
// decoder. CIPHER_OP_RX decrypts each block with the RX keystream while the
// cipher is active; CAPTURE watches the decrypted blocks, so a Cipher_ON
// block (sent in clear) switches decryption on from the next block and a
// Cipher_OFF block (sent encrypted) switches it off from the next block,
// matching the transmitter block for block. EXTRACT then replaces both kinds
// of management block by idle blocks and reports them on evt. Latency: one
// clock (the EXTRACT register). Decryption and capture are combinational in
// the same cycle, so the state change takes effect on the very next block.
module rx_decrypt
  import physec_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  pcs_blk_t         in,         // from the descrambler
  output pcs_blk_t         out,        // to the 64b/66b decoder
  output mgmt_msg_e        evt,        // management block removed
  output logic             active,
  // keystream
  input  logic [PAY_W-1:0] ks_data,
  input  logic             ks_sync,
  output logic             ks_adv
);
  pcs_blk_t  dec;
  mgmt_msg_e cap_msg;

  cipher_op u_cipher (
    .en(active && in.valid), .d_in(in.data), .ks_data, .ks_sync,
    .d_out(dec.data));
  assign dec.valid = in.valid;

  cipher_capture u_capture (
    .clk, .rst_n, .blk(dec), .active, .ks_adv, .msg(cap_msg));

  mgmt_extract u_extract (.clk, .rst_n, .in(dec), .out, .evt);
endmodule
