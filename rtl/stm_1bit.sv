// stm_1bit: the keystream generator for the sync header (STM_1BIT). It is the
// paper's basic generator, an STM cell perturbed by its own 61-bit LFSR, whose
// output function keeps a single bit, x_i[0]. Its key is 189 bits:
// y0 (61, LFSR seed), x0 (64) and gamma (64).
// load stores the key and starts the reciprocal computation; ready rises
// 128 clocks later; each adv while ready steps map and LFSR together, and
// ks_sync shows the bit of the current state.
module stm_1bit
  import physec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [LFSR_W-1:0] y0,
  input  stm_key_t          key,
  input  logic              adv,
  output logic              ks_sync,
  output logic              ready
);
  logic [LFSR_W-1:0] lfsr;
  logic              step;

  assign step = adv && ready;

  lfsr61 u_lfsr (.clk, .rst_n, .load, .seed(y0), .adv(step), .state(lfsr));

  stm_generator #(.OUT_W(1)) u_gen (
    .clk, .rst_n, .load, .key, .adv(step), .noise(lfsr[NOISE_W-1:0]),
    .ks(ks_sync), .ready);
endmodule
