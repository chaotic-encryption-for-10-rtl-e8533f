// pcs_encoder: 10GBASE-R 64b/66b encoder, XGMII (64 data bits, 8 control
// flags, lane 0 in bits [7:0]) to one 66-bit block per clock.
//
// Each XGMII word is matched against the fifteen block formats of IEEE 802.3
// clause 49 (data, all-control 0x1E, the ordered-set and start formats 0x2D,
// 0x33, 0x66, 0x55, 0x78, 0x4B and the eight terminate formats 0x87..0xFF).
// Control characters become 7-bit codes (/I/ 0x07 -> 0x00, /E/ 0xFE -> 0x1E,
// LPI and the reserved /R/ codes likewise), ordered-set characters /Q/ 0x9C
// and /Fsig/ 0x5C become 4-bit O codes 0x0 and 0xF. A word that fits no
// format is sent as an error block (0x1E with eight /E/ codes). Payload field
// k of a format sits at its clause-49 bit position, block bit 2 first.
// One clock of latency; valid follows the input strobe.
// The block formats are those the paper tabulates; the encoder itself is the
// standard one and the paper does not describe it. This version checks word
// by word only: the clause-49 transmit state machine, which also rejects
// illegal sequences of blocks, is left out.
module pcs_encoder
  import physec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        xgmii_valid,
  input  logic [63:0] xgmii_txd,
  input  logic [7:0]  xgmii_txc,
  output pcs_blk_t    out
);
  localparam logic [7:0] X_S = 8'hFB, X_T = 8'hFD, X_Q = 8'h9C, X_FSIG = 8'h5C;

  function automatic logic [6:0] cc7(input logic [7:0] c);
    case (c)
      8'h07:   return 7'h00;   // idle
      8'h06:   return 7'h06;   // LPI
      8'h1C:   return 7'h2D;   // reserved /R/ codes
      8'h3C:   return 7'h33;
      8'h7C:   return 7'h4B;
      8'hBC:   return 7'h55;
      8'hDC:   return 7'h66;
      8'hF7:   return 7'h78;
      default: return 7'h1E;   // error
    endcase
  endfunction

  function automatic logic [3:0] oc4(input logic [7:0] c);
    return (c == X_FSIG) ? 4'hF : 4'h0;
  endfunction

  logic [7:0] d [8];
  logic [7:0] is_s, is_t, is_o, is_c, is_d;
  logic [PAY_W-1:0] p;
  logic [1:0]       sh;
  logic             ok;     // terminate format k matches

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      d[i]    = xgmii_txd[8*i +: 8];
      is_d[i] = !xgmii_txc[i];
      is_s[i] = xgmii_txc[i] && d[i] == X_S;
      is_t[i] = xgmii_txc[i] && d[i] == X_T;
      is_o[i] = xgmii_txc[i] && (d[i] == X_Q || d[i] == X_FSIG);
      is_c[i] = xgmii_txc[i] && !is_s[i] && !is_t[i] && !is_o[i];
    end

    sh = SH_CTRL;
    p  = '0;
    ok = 1'b0;
    if (&is_d) begin
      sh = SH_DATA;
      p  = xgmii_txd;
    end else if (is_s[0] && &is_d[7:1]) begin
      p = {xgmii_txd[63:8], 8'h78};
    end else if (&is_c) begin
      p[7:0] = 8'h1E;
      for (int i = 0; i < 8; i++) p[8 + 7*i +: 7] = cc7(d[i]);
    end else if (&is_c[3:0] && is_o[4] && &is_d[7:5]) begin
      p[7:0] = 8'h2D;
      for (int i = 0; i < 4; i++) p[8 + 7*i +: 7] = cc7(d[i]);
      p[39:36] = oc4(d[4]);
      p[63:40] = xgmii_txd[63:40];
    end else if (&is_c[3:0] && is_s[4] && &is_d[7:5]) begin
      p[7:0] = 8'h33;
      for (int i = 0; i < 4; i++) p[8 + 7*i +: 7] = cc7(d[i]);
      p[63:40] = xgmii_txd[63:40];
    end else if (is_o[0] && &is_d[3:1] && is_s[4] && &is_d[7:5]) begin
      p = {xgmii_txd[63:40], 4'h0, oc4(d[0]), xgmii_txd[31:8], 8'h66};
    end else if (is_o[0] && &is_d[3:1] && is_o[4] && &is_d[7:5]) begin
      p = {xgmii_txd[63:40], oc4(d[4]), oc4(d[0]), xgmii_txd[31:8], 8'h55};
    end else if (is_o[0] && &is_d[3:1] && &is_c[7:4]) begin
      p = {cc7(d[7]), cc7(d[6]), cc7(d[5]), cc7(d[4]), oc4(d[0]), xgmii_txd[31:8], 8'h4B};
    end else begin
      // error block unless a terminate format matches below
      p[7:0] = 8'h1E;
      for (int i = 0; i < 8; i++) p[8 + 7*i +: 7] = 7'h1E;
      for (int k = 0; k < 8; k++) begin
        ok = is_t[k];
        for (int i = 0; i < 8; i++) begin
          if (i < k && !is_d[i]) ok = 1'b0;
          if (i > k && !is_c[i]) ok = 1'b0;
        end
        if (ok) begin
          p = '0;
          p[7:0] = term_type(k);
          for (int i = 0; i < k; i++) p[8 + 8*i +: 8] = d[i];
          for (int i = k + 1; i < 8; i++) p[8 + 8*k + (7 - k) + 7*(i - k - 1) +: 7] = cc7(d[i]);
        end
      end
    end
  end

  function automatic logic [7:0] term_type(input int k);
    case (k)
      0: return 8'h87;  1: return 8'h99;  2: return 8'hAA;  3: return 8'hB4;
      4: return 8'hCC;  5: return 8'hD2;  6: return 8'hE1;  default: return 8'hFF;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= '{valid: xgmii_valid, data: {p, sh}};
  end
endmodule
