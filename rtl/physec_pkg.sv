// physec_pkg: types and constants shared by the 10GBASE-R encryption blocks.
//
// A 66-bit 64b/66b block is held as blk[65:0]: blk[1:0] is the 2-bit sync
// header and blk[65:2] the 64-bit payload, whose first octet blk[9:2] is the
// block type field of a control block. The header is kept as a 2-bit value in
// which 2'b01 marks a data block and 2'b10 a control block, the numbering used
// by the header mapping of the cipher (value 1 maps to 0, value 2 maps to 1).
//
// The Cipher_ON and Cipher_OFF management blocks are 0x55 blocks (two ordered
// sets) whose lanes 1..3 carry the sequence bytes 0x00 0x00 0x04 (ON) or
// 0x00 0x00 0x05 (OFF), in both halves, with the Sequence O-code 0x0. The
// idle block is the 0x1E block with eight /I/ control codes (7'h00 each).
package physec_pkg;

  localparam int BLK_W     = 66;   // 64b/66b block width
  localparam int PAY_W     = 64;   // payload width
  localparam int STM_W     = 64;   // STM state width (x_i, gamma, x0)
  localparam int LFSR_W    = 61;   // LFSR length (y0)
  localparam int NOISE_W   = 8;    // LFSR bits XORed into x_i[7:0]
  localparam int GEN_OUT_W = 16;   // output bits of one bank generator
  localparam int BANK_N    = 4;    // generators in the 64-bit bank

  localparam logic [1:0] SH_DATA = 2'b01;
  localparam logic [1:0] SH_CTRL = 2'b10;

  localparam logic [7:0] BT_IDLE = 8'h1E;  // C0..C7 control block
  localparam logic [7:0] BT_OO   = 8'h55;  // O0 D1 D2 D3 / O4 D5 D6 D7

  localparam logic [3:0] OCODE_SEQ  = 4'h0;
  localparam logic [7:0] OS_CIPHER_ON  = 8'h04;
  localparam logic [7:0] OS_CIPHER_OFF = 8'h05;

  // One 66-bit block with its strobe. A block is present in a cycle when
  // valid is 1; the stream may pause (valid 0) as a 64b/66b gearbox does.
  typedef struct packed {
    logic              valid;
    logic [BLK_W-1:0]  data;
  } pcs_blk_t;

  // Management messages that INSERT can place and EXTRACT can remove.
  typedef enum logic [1:0] {
    MSG_NONE = 2'd0,
    MSG_ON   = 2'd1,
    MSG_OFF  = 2'd2
  } mgmt_msg_e;

  // Key of one basic STM generator: control parameter and initial state.
  typedef struct packed {
    logic [STM_W-1:0] gamma;
    logic [STM_W-1:0] x0;
  } stm_key_t;

  // Key of one direction: the 64-bit bank (shared y0, four STM keys) and the
  // 1-bit sync generator (its own y0 and STM key, 189 bits).
  typedef struct packed {
    logic [LFSR_W-1:0]          data_y0;
    stm_key_t [BANK_N-1:0]      data_stm;
    logic [LFSR_W-1:0]          sync_y0;
    stm_key_t                   sync_stm;
  } dir_key_t;

  // 0x55 block carrying two identical sequence ordered sets whose third
  // data lane holds code.
  function automatic logic [BLK_W-1:0] seq_os_block(input logic [7:0] code);
    logic [PAY_W-1:0] p;
    p = '0;
    p[7:0]   = BT_OO;
    p[15:8]  = 8'h00;      // D1
    p[23:16] = 8'h00;      // D2
    p[31:24] = code;       // D3
    p[35:32] = OCODE_SEQ;  // O0
    p[39:36] = OCODE_SEQ;  // O4
    p[47:40] = 8'h00;      // D5
    p[55:48] = 8'h00;      // D6
    p[63:56] = code;       // D7
    return {p, SH_CTRL};
  endfunction

  function automatic logic [BLK_W-1:0] idle_block();
    return {56'h0, BT_IDLE, SH_CTRL};
  endfunction

  function automatic logic [BLK_W-1:0] msg_block(input mgmt_msg_e m);
    return (m == MSG_OFF) ? seq_os_block(OS_CIPHER_OFF) : seq_os_block(OS_CIPHER_ON);
  endfunction

  // Which management message, if any, a block is.
  function automatic mgmt_msg_e classify(input logic [BLK_W-1:0] b);
    if (b == seq_os_block(OS_CIPHER_ON))  return MSG_ON;
    if (b == seq_os_block(OS_CIPHER_OFF)) return MSG_OFF;
    return MSG_NONE;
  endfunction

endpackage
