// keystream_gen: the keystream of one direction (KEYSTREAM TX or KEYSTREAM
// RX): the 64-bit payload bank and the 1-bit sync generator, stepped together
// once per encrypted block. Key: dir_key_t (573 bits for the bank, 189 for
// the sync generator). ready is high when both have finished their key load.
// ks_data/ks_sync are the keystream for the block now being ciphered; after
// an adv they show the next values on the following clock.
// The two generators and their widths follow the paper. Own choices: the
// key layout, and that only a load restarts the generators; switching the
// cipher off and on pauses and resumes them, so no keystream is repeated.
module keystream_gen
  import physec_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  dir_key_t         key,
  input  logic             adv,
  output logic [PAY_W-1:0] ks_data,
  output logic             ks_sync,
  output logic             ready
);
  logic rdy_d, rdy_s;

  assign ready = rdy_d && rdy_s;

  stm_bank #(.N(BANK_N)) u_bank (
    .clk, .rst_n, .load, .y0(key.data_y0), .key(key.data_stm),
    .adv(adv && ready), .ks_data, .ready(rdy_d));

  stm_1bit u_sync (
    .clk, .rst_n, .load, .y0(key.sync_y0), .key(key.sync_stm),
    .adv(adv && ready), .ks_sync, .ready(rdy_s));
endmodule
