// pcs_block_sync: RX block synchronisation, from the 16-bit words of the
// deserializer to aligned 66-bit blocks, in the word clock domain.
//
// Received bits are collected, first bit lowest, and cut into 66-bit blocks
// at the current boundary. While unlocked, a block whose header is not 01
// or 10 makes the boundary slip by one bit; LOCK_N valid headers in a row
// declare lock. While locked, BAD_N invalid headers within LOCK_N blocks drop
// lock again. Blocks are passed on (valid = 1) only while locked.
// This follows the lock rule of IEEE 802.3 clause 49 (64 valid headers to
// lock, 16 bad of 64 to lose it), kept with counters rather than the
// clause-49 state diagram; the paper only names the block ("Sync header").
module pcs_block_sync
  import physec_pkg::*;
#(
  parameter int LOCK_N = 64,
  parameter int BAD_N  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] rx_word,
  output pcs_blk_t    out,
  output logic        lock
);
  localparam int BUF_W = BLK_W + 16;
  localparam int CNT_W = $clog2(BUF_W + 1);
  localparam int RUN_W = $clog2(LOCK_N + 1);

  logic [BUF_W-1:0] bits, bits_n;
  logic [CNT_W-1:0] cnt, cnt_n;
  logic [RUN_W-1:0] good_run, blk_cnt, bad_cnt;
  logic             have, hdr_ok, slip;
  logic [BLK_W-1:0] blk;

  always_comb begin
    bits_n = bits | (BUF_W'(rx_word) << cnt);
    cnt_n  = cnt + CNT_W'(16);
    have   = (cnt_n >= CNT_W'(BLK_W));
    blk    = bits_n[BLK_W-1:0];
    hdr_ok = (blk[1:0] == SH_DATA) || (blk[1:0] == SH_CTRL);
    slip   = have && !hdr_ok && !lock;
    if (have) begin
      bits_n = bits_n >> (slip ? BLK_W + 1 : BLK_W);
      cnt_n  = cnt_n - CNT_W'(slip ? BLK_W + 1 : BLK_W);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits     <= '0;
      cnt      <= '0;
      lock     <= 1'b0;
      good_run <= '0;
      blk_cnt  <= '0;
      bad_cnt  <= '0;
      out      <= '0;
    end else begin
      bits      <= bits_n;
      cnt       <= cnt_n;
      out.valid <= have && lock;
      if (have) out.data <= blk;
      if (have) begin
        if (!lock) begin
          good_run <= hdr_ok ? good_run + 1'b1 : '0;
          if (hdr_ok && good_run == RUN_W'(LOCK_N - 1)) begin
            lock    <= 1'b1;
            blk_cnt <= '0;
            bad_cnt <= '0;
          end
        end else begin
          if (!hdr_ok && bad_cnt == RUN_W'(BAD_N - 1)) begin
            lock     <= 1'b0;
            good_run <= '0;
          end else if (blk_cnt == RUN_W'(LOCK_N - 1)) begin
            blk_cnt <= '0;
            bad_cnt <= '0;
          end else begin
            blk_cnt <= blk_cnt + 1'b1;
            bad_cnt <= bad_cnt + RUN_W'(!hdr_ok);
          end
        end
      end
    end
  end
endmodule
