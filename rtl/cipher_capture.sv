// cipher_capture: the CAPTURE function of one direction. It watches the
// plaintext block stream (on TX the output of INSERT, on RX the output of
// the decrypting CIPHER_OP) and keeps the "cipher active" state.
//
// A Cipher_ON block switches the cipher on from the next block, a Cipher_OFF
// block switches it off from the next block. Hence the Cipher_ON block itself
// travels in clear and the Cipher_OFF block travels encrypted, and TX and RX
// see both blocks at the same keystream position. active is the state that
// applies to the block present now; ks_adv tells the keystream generators to
// step after this block. They step on every block handled while active and
// also on the Cipher_ON block, so the initial state x0 is never used as
// keystream (own choice; the paper only says the generators are enabled
// when Cipher_ON is captured). Detection is combinational, state updates on
// the clock edge, so it can sit in a feedback path through the decryptor.
module cipher_capture
  import physec_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  pcs_blk_t   blk,        // plaintext block stream
  output logic       active,     // cipher enabled for the present block
  output logic       ks_adv,     // step keystream generators at this edge
  output mgmt_msg_e  msg         // management message in the present block
);
  always_comb begin
    msg    = blk.valid ? classify(blk.data) : MSG_NONE;
    ks_adv = blk.valid && (active || msg == MSG_ON);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               active <= 1'b0;
    else if (msg == MSG_ON)   active <= 1'b1;
    else if (msg == MSG_OFF)  active <= 1'b0;
  end
endmodule
