// mgmt_extract: the EXTRACT function. Every Cipher_ON or Cipher_OFF block in
// the decrypted RX stream is replaced by a 0x1E block of eight /I/ characters
// (the reverse of INSERT), so the 64b/66b decoder and the MAC only ever see
// standard blocks. Each removal is reported on evt for one cycle, aligned with
// the replaced block on the output. One register stage of latency.
module mgmt_extract
  import physec_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  pcs_blk_t   in,
  output pcs_blk_t   out,
  output mgmt_msg_e  evt
);
  mgmt_msg_e m;
  assign m = in.valid ? classify(in.data) : MSG_NONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
      evt <= MSG_NONE;
    end else begin
      out <= in;
      evt <= m;
      if (m != MSG_NONE) out.data <= idle_block();
    end
  end
endmodule
