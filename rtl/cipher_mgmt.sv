// cipher_mgmt: the MANAGEMENT module. It turns host commands into management
// blocks for INSERT and reports what the receiver has extracted.
//
// cmd_on / cmd_off are one-cycle commands; the latest one is held
// until INSERT takes it. Cipher_ON is only handed to INSERT once the TX
// keystream generators report ready (their reciprocals of gamma are computed
// after a key load), so encryption can never start on a half-loaded key.
// Each Cipher_ON / Cipher_OFF block that EXTRACT removes is counted. The key
// load strobes are passed to the keystream generators; the keys themselves
// come from a configuration port, as the paper preloads them through a debug
// interface. The paper gives only the role of this module; the command
// handshake, the ready gating and the counters are this design's own.
module cipher_mgmt
  import physec_pkg::*;
#(
  parameter int CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // host side
  input  logic             cmd_on,
  input  logic             cmd_off,
  input  logic             cfg_tx_load,
  input  logic             cfg_rx_load,
  output logic             busy,          // a command waits for insertion
  output logic [CNT_W-1:0] rx_on_cnt,     // Cipher_ON blocks received
  output logic [CNT_W-1:0] rx_off_cnt,    // Cipher_OFF blocks received
  // INSERT side
  output logic             ins_req,
  output mgmt_msg_e        ins_msg,
  input  logic             ins_ready,
  // EXTRACT side
  input  mgmt_msg_e        ext_evt,
  // keystream side
  input  logic             tx_ks_ready,
  output logic             tx_ks_load,
  output logic             rx_ks_load
);
  mgmt_msg_e pend;

  assign tx_ks_load = cfg_tx_load;
  assign rx_ks_load = cfg_rx_load;
  assign busy       = (pend != MSG_NONE);
  assign ins_msg    = pend;
  assign ins_req    = (pend != MSG_NONE) && ins_ready &&
                      (pend != MSG_ON || tx_ks_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= MSG_NONE;
      rx_on_cnt  <= '0;
      rx_off_cnt <= '0;
    end else begin
      if (cmd_on)        pend <= MSG_ON;
      else if (cmd_off)  pend <= MSG_OFF;
      else if (ins_req)  pend <= MSG_NONE;
      if (ext_evt == MSG_ON)  rx_on_cnt  <= rx_on_cnt + 1'b1;
      if (ext_evt == MSG_OFF) rx_off_cnt <= rx_off_cnt + 1'b1;
    end
  end
endmodule
