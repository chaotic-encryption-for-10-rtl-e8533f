// pcs_scrambler: the 10GBASE-R self-synchronising scrambler, polynomial
// 1 + x^39 + x^58, applied to the 64 payload bits of each block in
// transmission order (blk[2] first); the sync header blk[1:0] is not
// scrambled. Each output bit is in ^ s[38] ^ s[57], where s holds the last 58
// output bits, s[0] the newest. The state resets to all ones. One clock of
// latency; pauses (valid 0) leave the state unchanged.
// The paper only names this block; it is the standard one.
module pcs_scrambler
  import physec_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pcs_blk_t in,
  output pcs_blk_t out
);
  logic [57:0]      s, s_n;
  logic [PAY_W-1:0] p;

  always_comb begin
    s_n = s;
    for (int i = 0; i < PAY_W; i++) begin
      p[i] = in.data[2+i] ^ s_n[38] ^ s_n[57];
      s_n  = {s_n[56:0], p[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s   <= '1;
      out <= '0;
    end else begin
      out.valid <= in.valid;
      if (in.valid) begin
        s        <= s_n;
        out.data <= {p, in.data[1:0]};
      end
    end
  end
endmodule
