// stm_generator: one keystream generator built around an STM cell, as in the
// basic generator of the paper but with the LFSR outside, so that several
// generators can share one LFSR.
//
// The state x_i is fed back to the map as x~_i = {x_i[63:8], x_i[7:0] ^ noise},
// noise being 8 LFSR bits; the output function keeps only the OUT_W least
// significant bits of x_i (16 in the payload bank, 1 for the sync header).
// Interface and timing are those of stm_cell: ks shows x_i[OUT_W-1:0] of the
// registered state and changes on the clock after adv.
module stm_generator
  import physec_pkg::*;
#(
  parameter int OUT_W = GEN_OUT_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  stm_key_t           key,
  input  logic               adv,
  input  logic [NOISE_W-1:0] noise,
  output logic [OUT_W-1:0]   ks,
  output logic               ready
);
  logic [STM_W-1:0] x, x_fb;

  assign x_fb = {x[STM_W-1:NOISE_W], x[NOISE_W-1:0] ^ noise};
  assign ks   = x[OUT_W-1:0];

  stm_cell u_cell (
    .clk, .rst_n, .load, .gamma(key.gamma), .x0(key.x0),
    .adv, .x_fb, .x, .ready);
endmodule
