// cipher_op: the stream-cipher operation applied to one 66-bit block; the
// same logic encrypts (CIPHER_OP_TX) and decrypts (CIPHER_OP_RX).
//
// The 64-bit payload d_in[65:2] is XORed with the 64-bit keystream data.
// The sync header d_in[1:0] is mapped to one bit (2'b01 -> 0, 2'b10 -> 1),
// XORed with the 1-bit keystream sync and mapped back (0 -> 2'b01,
// 1 -> 2'b10), so an encrypted header is still a valid 01/10 header and the
// 0/1 transition every 66 bits survives. With en = 0 the block passes
// unchanged. Purely combinational: the enclosing stage registers the result.
//
// Follows the paper: the split into header and payload, both XORs and the
// header mapping. Own choice: a corrupt header (2'b00 or 2'b11) cannot be
// mapped and is passed through unchanged so the decoder still sees the error.
module cipher_op
  import physec_pkg::*;
(
  input  logic              en,        // cipher active for this block
  input  logic [BLK_W-1:0]  d_in,
  input  logic [PAY_W-1:0]  ks_data,   // keystream data, 64 bits
  input  logic              ks_sync,   // keystream sync, 1 bit
  output logic [BLK_W-1:0]  d_out
);
  logic       hdr_ok;
  logic       hdr_bit;
  logic [1:0] hdr_out;

  always_comb begin
    hdr_ok  = (d_in[1:0] == SH_DATA) || (d_in[1:0] == SH_CTRL);
    hdr_bit = (d_in[1:0] == SH_CTRL);
    hdr_out = (hdr_bit ^ ks_sync) ? SH_CTRL : SH_DATA;
    if (!en)
      d_out = d_in;
    else
      d_out = {d_in[65:2] ^ ks_data, hdr_ok ? hdr_out : d_in[1:0]};
  end
endmodule
