// stm_recip: sequential reciprocal used by the skew tent map cell. For a
// 64-bit divisor d (read as the fraction d/2^64) it computes
// q = floor((2^128 - 1) / d), which is 1/(d/2^64) in unsigned Q64.64 format.
//
// A restoring divider produces one quotient bit per clock: start loads d,
// and 128 clocks later valid rises and q holds the result until the next
// start. d = 0 gives q = all ones. The paper computes 1/gamma and
// 1/(1-gamma) from the key but does not say how; a bit-serial divider run
// once per key load is this design's choice, since it is off the
// one-iteration-per-clock path.
module stm_recip #(
  parameter int D_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [D_W-1:0]   d,
  output logic             valid,
  output logic [2*D_W-1:0] q
);
  localparam int CNT_W = $clog2(2*D_W + 1);

  logic [D_W-1:0]   div;
  logic [D_W-1:0]   rem;
  logic [CNT_W-1:0] left;
  logic [D_W:0]     rem_sh;
  logic             fits;

  always_comb begin
    rem_sh = {rem, 1'b1};               // every dividend bit is 1
    fits   = (rem_sh >= {1'b0, div});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div   <= '0;
      rem   <= '0;
      left  <= '0;
      q     <= '0;
      valid <= 1'b0;
    end else if (start) begin
      div   <= d;
      rem   <= '0;
      q     <= '0;
      left  <= CNT_W'(2*D_W);
      valid <= 1'b0;
    end else if (left != 0) begin
      rem   <= fits ? D_W'(rem_sh - {1'b0, div}) : rem_sh[D_W-1:0];
      q     <= {q[2*D_W-2:0], fits};
      left  <= left - 1'b1;
      valid <= (left == 1);
    end
  end
endmodule
