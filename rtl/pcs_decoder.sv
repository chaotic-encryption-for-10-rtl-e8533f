// pcs_decoder: 10GBASE-R 64b/66b decoder, one 66-bit block per clock to an
// XGMII word (64 data bits, 8 control flags, lane 0 in bits [7:0]); the
// inverse of pcs_encoder. Each of the fifteen clause-49 block formats is
// unpacked; 7-bit control codes and 4-bit O codes are turned back into XGMII
// characters. A block with a 00/11 header or an unknown block type becomes
// eight /E/ characters, which makes the MAC drop the frame.
// One clock of latency; valid follows the input strobe. As for the encoder,
// the clause-49 receive state machine is left out: decoding is block
// by block.
module pcs_decoder
  import physec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  pcs_blk_t    in,
  output logic        xgmii_valid,
  output logic [63:0] xgmii_rxd,
  output logic [7:0]  xgmii_rxc
);
  localparam logic [7:0] X_S = 8'hFB, X_T = 8'hFD, X_E = 8'hFE;

  function automatic logic [7:0] cc8(input logic [6:0] c);
    case (c)
      7'h00:   return 8'h07;
      7'h06:   return 8'h06;
      7'h2D:   return 8'h1C;
      7'h33:   return 8'h3C;
      7'h4B:   return 8'h7C;
      7'h55:   return 8'hBC;
      7'h66:   return 8'hDC;
      7'h78:   return 8'hF7;
      default: return X_E;
    endcase
  endfunction

  function automatic logic [7:0] oc8(input logic [3:0] o);
    return (o == 4'h0) ? 8'h9C : (o == 4'hF) ? 8'h5C : X_E;
  endfunction

  logic [PAY_W-1:0] p;
  logic [7:0]       ty;
  logic [7:0]       d [8];
  logic [7:0]       c;
  logic [63:0]      dw;

  always_comb begin
    p  = in.data[65:2];
    ty = p[7:0];
    for (int i = 0; i < 8; i++) d[i] = X_E;
    c  = 8'hFF;
    if (in.data[1:0] == SH_DATA) begin
      for (int i = 0; i < 8; i++) d[i] = p[8*i +: 8];
      c = 8'h00;
    end else if (in.data[1:0] == SH_CTRL) begin
      case (ty)
        8'h1E: for (int i = 0; i < 8; i++) d[i] = cc8(p[8 + 7*i +: 7]);
        8'h2D, 8'h33: begin
          for (int i = 0; i < 4; i++) d[i] = cc8(p[8 + 7*i +: 7]);
          d[4] = (ty == 8'h2D) ? oc8(p[39:36]) : X_S;
          for (int i = 5; i < 8; i++) d[i] = p[40 + 8*(i-5) +: 8];
          c = 8'h1F;
        end
        8'h66, 8'h55: begin
          d[0] = oc8(p[35:32]);
          for (int i = 1; i < 4; i++) d[i] = p[8 + 8*(i-1) +: 8];
          d[4] = (ty == 8'h55) ? oc8(p[39:36]) : X_S;
          for (int i = 5; i < 8; i++) d[i] = p[40 + 8*(i-5) +: 8];
          c = 8'h11;
        end
        8'h78: begin
          d[0] = X_S;
          for (int i = 1; i < 8; i++) d[i] = p[8 + 8*(i-1) +: 8];
          c = 8'h01;
        end
        8'h4B: begin
          d[0] = oc8(p[35:32]);
          for (int i = 1; i < 4; i++) d[i] = p[8 + 8*(i-1) +: 8];
          for (int i = 4; i < 8; i++) d[i] = cc8(p[36 + 7*(i-4) +: 7]);
          c = 8'hF1;
        end
        8'h87, 8'h99, 8'hAA, 8'hB4, 8'hCC, 8'hD2, 8'hE1, 8'hFF: begin
          for (int k = 0; k < 8; k++) begin
            if (ty == term_type(k)) begin
              for (int i = 0; i < k; i++) d[i] = p[8 + 8*i +: 8];
              d[k] = X_T;
              for (int i = k + 1; i < 8; i++) d[i] = cc8(p[8 + 8*k + (7-k) + 7*(i-k-1) +: 7]);
              c = 8'hFF << k;
            end
          end
        end
        default: ;
      endcase
    end
    for (int i = 0; i < 8; i++) dw[8*i +: 8] = d[i];
  end

  function automatic logic [7:0] term_type(input int k);
    case (k)
      0: return 8'h87;  1: return 8'h99;  2: return 8'hAA;  3: return 8'hB4;
      4: return 8'hCC;  5: return 8'hD2;  6: return 8'hE1;  default: return 8'hFF;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xgmii_valid <= 1'b0;
      xgmii_rxd   <= {8{8'h07}};
      xgmii_rxc   <= 8'hFF;
    end else begin
      xgmii_valid <= in.valid;
      if (in.valid) begin
        xgmii_rxd <= dw;
        xgmii_rxc <= c;
      end
    end
  end
endmodule
