// stm_bank: the 64-bit keystream generator for the block payload (STM_BANK
// plus its LFSR). Four STM generators, each with its own key (x0, gamma),
// share one 61-bit LFSR seeded with y0; generator k takes the LFSR bits
// [8k+7:8k] as noise and its 16 output bits form ks_data[16k+15:16k].
// The bank structure, the shared LFSR, 8 noise bits per generator and the
// 16-bit outputs follow the paper; which LFSR bits and which output lanes
// belong to which generator is this design's choice.
// Timing as stm_1bit: ready 128 clocks after load, one 64-bit word per adv.
module stm_bank
  import physec_pkg::*;
#(
  parameter int N = BANK_N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [LFSR_W-1:0]    y0,
  input  stm_key_t [N-1:0]     key,
  input  logic                 adv,
  output logic [N*GEN_OUT_W-1:0] ks_data,
  output logic                 ready
);
  logic [LFSR_W-1:0] lfsr;
  logic [N-1:0]      rdy;
  logic              step;

  assign ready = &rdy;
  assign step  = adv && ready;

  lfsr61 u_lfsr (.clk, .rst_n, .load, .seed(y0), .adv(step), .state(lfsr));

  for (genvar k = 0; k < N; k++) begin : g_gen
    stm_generator #(.OUT_W(GEN_OUT_W)) u_gen (
      .clk, .rst_n, .load, .key(key[k]), .adv(step),
      .noise(lfsr[NOISE_W*k +: NOISE_W]),
      .ks(ks_data[GEN_OUT_W*k +: GEN_OUT_W]), .ready(rdy[k]));
  end

  initial assert (N * NOISE_W <= LFSR_W) else $error("LFSR too short for N");
endmodule
