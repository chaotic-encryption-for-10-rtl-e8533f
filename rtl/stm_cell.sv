// stm_cell: the skew tent map (STM) cell, one map iteration per clock.
//
//   x_{i+1} = x~_i / gamma              if x~_i <= gamma
//   x_{i+1} = (1 - x~_i) / (1 - gamma)  otherwise
//
// All values are unsigned 64-bit fractions (value = word / 2^64). The
// divisions are done as multiplications by the reciprocals 1/gamma and
// 1/(1-gamma), as in the map's block diagram: a comparator selects one
// reciprocal and one operand (x~ or 1 - x~) and a multiplier forms the new
// state. The reciprocals are Q64.64 words computed by two stm_recip units
// after each key load (128 clocks, then ready = 1); 1 - v is taken as the
// one's complement ~v, i.e. 1 - v - 2^-64. The product of 64 x 128 bits is
// truncated to bits [127:64], which cannot overflow because the selected
// operand never exceeds the selected denominator.
//
// Interface: load (one cycle) stores x0 as the state and gamma as the
// parameter and restarts the reciprocals; adv steps the state from the
// fed-back value x_fb (x~_i; x_i itself for the plain map). Steps requested
// before ready are ignored. x is the registered state x_i.
// From the paper: the map, the 64-bit state, the reciprocal/multiplier
// structure. Own choices: the number formats, truncation and the divider.
module stm_cell
  import physec_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [STM_W-1:0] gamma,
  input  logic [STM_W-1:0] x0,
  input  logic             adv,
  input  logic [STM_W-1:0] x_fb,
  output logic [STM_W-1:0] x,
  output logic             ready
);
  logic [STM_W-1:0]   g;
  logic [2*STM_W-1:0] r_lo, r_hi;        // 1/gamma, 1/(1-gamma)
  logic               v_lo, v_hi;
  logic               low_side;
  logic [STM_W-1:0]   opnd;
  logic [2*STM_W-1:0] recip;
  logic [3*STM_W-1:0] prod;
  logic [STM_W-1:0]   x_next;

  stm_recip #(.D_W(STM_W)) u_recip_lo (
    .clk, .rst_n, .start(load), .d(gamma),  .valid(v_lo), .q(r_lo));
  stm_recip #(.D_W(STM_W)) u_recip_hi (
    .clk, .rst_n, .start(load), .d(~gamma), .valid(v_hi), .q(r_hi));

  assign ready = v_lo && v_hi;

  always_comb begin
    low_side = (x_fb <= g);
    opnd     = low_side ? x_fb : ~x_fb;
    recip    = low_side ? r_lo : r_hi;
    prod     = {{STM_W{1'b0}}, opnd} * {{STM_W{1'b0}}, recip};
    x_next   = prod[2*STM_W-1:STM_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g <= '0;
      x <= '0;
    end else if (load) begin
      g <= gamma;
      x <= x0;
    end else if (adv && ready) begin
      x <= x_next;
    end
  end
endmodule
