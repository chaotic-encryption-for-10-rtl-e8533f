// physec_pcs: a 10GBASE-R PCS with encryption, both directions of one
// Ethernet interface, from XGMII to the 16-bit words of the serializer and
// deserializer. On TX, XGMII words are 64b/66b encoded, pass TX ENCRYPT and
// the scrambler, and the gearbox cuts the 66-bit blocks into 16-bit words.
// On RX, block synchronisation finds the 66-bit boundaries in the received
// words, and the blocks pass the descrambler, RX DECRYPT and the decoder.
// Encryption sits before the scrambler and decryption after the
// descrambler, so the line still carries scrambled, DC-balanced 64b/66b
// blocks with valid 01/10 headers.
//
// Two keystream generators (TX and RX, each a 64-bit bank plus a 1-bit sync
// generator) are keyed separately, so each direction of a link can use its
// own key. The management module turns cmd_on / cmd_off into Cipher_ON /
// Cipher_OFF blocks that replace idle blocks, and counts those the receiver
// removes. Keys are loaded through the cfg port (cfg_*_load, then *_ks_ready
// 129 clocks later); they are not exchanged over the link.
//
// Timing: everything runs on the line word clock (644.53 MHz for 10.3125
// Gb/s at 16 bits), one 16-bit word per clock in each direction. The block
// path moves one block on 16 of every 66 clocks: xgmii_tx_ready says that
// the XGMII word on the bus is taken at this edge, and xgmii_rx_valid marks
// the clocks that deliver a word. No block is added or dropped, so the
// encryption costs no throughput. Block latency: TX 4 clocks before the
// gearbox (encoder, insert, cipher, scrambler), RX 3 clocks after block
// synchronisation (descrambler, extract, decoder).
// The analog PMA (serializer, CDR, PLL, drivers) is outside this module.
// From the paper: where the cipher sits, the ON/OFF blocks, one key per
// direction. Own choices: the single word clock, keys loaded from ports,
// and the simplified clause-49 parts (no XGMII state machines).
module physec_pcs
  import physec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // XGMII (MAC side)
  output logic        xgmii_tx_ready,  // word on txd/txc taken at this edge
  input  logic [63:0] xgmii_txd,
  input  logic [7:0]  xgmii_txc,
  output logic        xgmii_rx_valid,
  output logic [63:0] xgmii_rxd,
  output logic [7:0]  xgmii_rxc,
  // line side, to the serializer and from the deserializer
  output logic [15:0] tx_word,
  input  logic [15:0] rx_word,
  output logic        rx_block_lock,
  output logic        tx_underflow,
  // management and configuration
  input  logic        cmd_on,
  input  logic        cmd_off,
  input  logic        cfg_tx_load,
  input  logic        cfg_rx_load,
  input  dir_key_t    tx_key,
  input  dir_key_t    rx_key,
  output logic        mgmt_busy,
  output logic        tx_active,
  output logic        rx_active,
  output logic        tx_ks_ready,
  output logic        rx_ks_ready,
  output logic [15:0] rx_on_cnt,
  output logic [15:0] rx_off_cnt
);
  pcs_blk_t         tx_blk_in, tx_enc, tx_blk_out, rx_blk_in, rx_dsc, rx_blk_out;
  logic             ins_req, ins_ready, ins_done;
  mgmt_msg_e        ins_msg, ext_evt;
  logic             tx_ks_load, rx_ks_load, tx_adv, rx_adv;
  logic [PAY_W-1:0] tx_ksd, rx_ksd;
  logic             tx_kss, rx_kss;

  pcs_encoder u_enc (
    .clk, .rst_n, .xgmii_valid(xgmii_tx_ready), .xgmii_txd, .xgmii_txc,
    .out(tx_blk_in));

  pcs_decoder u_dec (
    .clk, .rst_n, .in(rx_blk_out), .xgmii_valid(xgmii_rx_valid), .xgmii_rxd,
    .xgmii_rxc);

  cipher_mgmt #(.CNT_W(16)) u_mgmt (
    .clk, .rst_n, .cmd_on, .cmd_off, .cfg_tx_load, .cfg_rx_load,
    .busy(mgmt_busy), .rx_on_cnt, .rx_off_cnt,
    .ins_req, .ins_msg, .ins_ready, .ext_evt,
    .tx_ks_ready, .tx_ks_load, .rx_ks_load);

  keystream_gen u_ks_tx (
    .clk, .rst_n, .load(tx_ks_load), .key(tx_key), .adv(tx_adv),
    .ks_data(tx_ksd), .ks_sync(tx_kss), .ready(tx_ks_ready));

  keystream_gen u_ks_rx (
    .clk, .rst_n, .load(rx_ks_load), .key(rx_key), .adv(rx_adv),
    .ks_data(rx_ksd), .ks_sync(rx_kss), .ready(rx_ks_ready));

  tx_encrypt u_tx (
    .clk, .rst_n, .in(tx_blk_in), .out(tx_enc),
    .ins_req, .ins_msg, .ins_ready, .ins_done, .active(tx_active),
    .ks_data(tx_ksd), .ks_sync(tx_kss), .ks_adv(tx_adv));

  pcs_scrambler u_scr (.clk, .rst_n, .in(tx_enc), .out(tx_blk_out));

  pcs_gearbox #(.AHEAD(8)) u_gbx (
    .clk, .rst_n, .req(xgmii_tx_ready), .in(tx_blk_out), .tx_word,
    .underflow(tx_underflow));

  pcs_block_sync #(.LOCK_N(64), .BAD_N(16)) u_bsync (
    .clk, .rst_n, .rx_word, .out(rx_blk_in), .lock(rx_block_lock));

  pcs_descrambler u_dsc (.clk, .rst_n, .in(rx_blk_in), .out(rx_dsc));

  rx_decrypt u_rx (
    .clk, .rst_n, .in(rx_dsc), .out(rx_blk_out), .evt(ext_evt),
    .active(rx_active), .ks_data(rx_ksd), .ks_sync(rx_kss), .ks_adv(rx_adv));
endmodule
