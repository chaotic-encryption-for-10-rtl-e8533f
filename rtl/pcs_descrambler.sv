// pcs_descrambler: the 10GBASE-R descrambler, 1 + x^39 + x^58, the inverse of
// pcs_scrambler. Each output bit is in ^ s[38] ^ s[57], where s holds the
// last 58 received (scrambled) bits, so it locks to any scrambler state
// within one block. The sync header passes unchanged. One clock of latency.
// The paper only names this block; it is the standard one.
module pcs_descrambler
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
      s_n  = {s_n[56:0], in.data[2+i]};
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
