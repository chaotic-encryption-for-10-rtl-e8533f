// lfsr61: the 61-stage LFSR whose low bits perturb the skew tent map state.
//
// Fibonacci form, shifting towards the MSB: the new bit s[0] is
// s[60] ^ s[4] ^ s[1] ^ s[0]. Its characteristic polynomial is the
// reciprocal of x^61 + x^5 + x^2 + x + 1, which is primitive, so any non-zero
// seed y0 gives the full period 2^61 - 1 (an all-zero seed stays zero and
// must not be used). load stores the seed; adv steps once per clock.
// The paper gives the length (61) and the use of the low 8 bits; the
// feedback polynomial is this design's choice.
module lfsr61
  import physec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [LFSR_W-1:0] seed,
  input  logic              adv,
  output logic [LFSR_W-1:0] state
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= '0;
    else if (load)  state <= seed;
    else if (adv)   state <= {state[LFSR_W-2:0],
                              state[60] ^ state[4] ^ state[1] ^ state[0]};
  end
endmodule
