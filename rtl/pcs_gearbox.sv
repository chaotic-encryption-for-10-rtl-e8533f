// pcs_gearbox: TX gearbox from 66-bit blocks to the 16-bit words of the
// serializer, in the word clock domain.
//
// Blocks are appended to a bit buffer, bit 0 first, and one 16-bit word
// (lowest buffer bits, so block bit 0 is sent first) leaves every clock. As
// 66 is not a multiple of 16, blocks are needed on only 16 of every 66
// clocks on average: the gearbox asks for them with req, a credit scheme that
// keeps the buffered plus requested bits at least 16*(AHEAD+1). Upstream
// logic must answer each req with exactly one valid block, in order, within
// AHEAD clocks; the PCS pipeline does so with its fixed latency.
// underflow pulses when no full word is buffered (only before the first
// blocks arrive, or when the upstream breaks the rule); zeros are sent then.
// The paper shows a 66-to-16-bit gearbox; the credit scheme is our own.
module pcs_gearbox
  import physec_pkg::*;
#(
  parameter int AHEAD = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        req,
  input  pcs_blk_t    in,
  output logic [15:0] tx_word,
  output logic        underflow
);
  localparam int BUF_W  = 16 * (AHEAD + 1) + 2 * BLK_W;
  localparam int CNT_W  = $clog2(BUF_W + 1);
  localparam int OUT_W  = 4;

  logic [BUF_W-1:0] bits, bits_n;
  logic [CNT_W-1:0] cnt, cnt_n;
  logic [OUT_W-1:0] owed;           // requested blocks still to arrive
  logic [CNT_W+1:0] level;

  always_comb begin
    level = (CNT_W+2)'(int'(cnt) + int'(owed) * BLK_W);
    req   = (level < (CNT_W+2)'(16 * (AHEAD + 1) + 16));
    bits_n = bits;
    cnt_n  = cnt;
    if (cnt_n >= 16) begin
      bits_n = bits_n >> 16;
      cnt_n  = cnt_n - 16;
    end else begin
      bits_n = '0;
      cnt_n  = '0;
    end
    if (in.valid) begin
      bits_n = bits_n | (BUF_W'(in.data) << cnt_n);
      cnt_n  = cnt_n + CNT_W'(BLK_W);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits      <= '0;
      cnt       <= '0;
      owed      <= '0;
      tx_word   <= '0;
      underflow <= 1'b0;
    end else begin
      bits      <= bits_n;
      cnt       <= cnt_n;
      owed      <= owed + OUT_W'(req) - OUT_W'(in.valid);
      tx_word   <= (cnt >= 16) ? bits[15:0] : 16'h0;
      underflow <= (cnt < 16);
    end
  end
endmodule
