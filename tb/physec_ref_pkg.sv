// physec_ref_pkg: reference models used by the testbenches. They are written
// from the algorithm descriptions, not from the RTL structure: the
// reciprocal uses the / operator, the scrambler works one bit at a time on a
// plain bit list, and the keystream generators are modelled as classes.
package physec_ref_pkg;
  import physec_pkg::*;

  function automatic logic [127:0] ref_recip(input logic [63:0] d);
    if (d == 0) return '1;
    return {128{1'b1}} / {64'd0, d};
  endfunction

  // one skew tent map step on fixed-point fractions
  function automatic logic [63:0] ref_stm(input logic [63:0] xt, input logic [63:0] g);
    logic [191:0] p;
    if (xt <= g) p = {128'd0, xt} * {64'd0, ref_recip(g)};
    else         p = {128'd0, ~xt} * {64'd0, ref_recip(~g)};
    return p[127:64];
  endfunction

  // the same map in floating point, for a tolerance check
  function automatic real ref_stm_real(input real x, input real g);
    if (x <= g) return x / g;
    return (1.0 - x) / (1.0 - g);
  endfunction

  function automatic real frac(input logic [63:0] v);
    return real'(v) / 18446744073709551616.0;
  endfunction

  function automatic logic [60:0] ref_lfsr(input logic [60:0] s);
    return {s[59:0], s[60] ^ s[4] ^ s[1] ^ s[0]};
  endfunction

  // keystream of one direction: four 16-bit generators sharing an LFSR and
  // a 1-bit generator with its own LFSR
  class ref_keystream;
    logic [60:0] ly_d, ly_s;
    logic [63:0] xd[4], gd[4];
    logic [63:0] xs, gs;
    function new(dir_key_t k);
      ly_d = k.data_y0;
      ly_s = k.sync_y0;
      for (int i = 0; i < 4; i++) begin
        xd[i] = k.data_stm[i].x0;
        gd[i] = k.data_stm[i].gamma;
      end
      xs = k.sync_stm.x0;
      gs = k.sync_stm.gamma;
    endfunction
    function logic [63:0] data();
      for (int i = 0; i < 4; i++) data[16*i +: 16] = xd[i][15:0];
    endfunction
    function logic sync();
      return xs[0];
    endfunction
    function void step();
      for (int i = 0; i < 4; i++)
        xd[i] = ref_stm({xd[i][63:8], xd[i][7:0] ^ ly_d[8*i +: 8]}, gd[i]);
      xs   = ref_stm({xs[63:8], xs[7:0] ^ ly_s[7:0]}, gs);
      ly_d = ref_lfsr(ly_d);
      ly_s = ref_lfsr(ly_s);
    endfunction
  endclass

  function automatic dir_key_t rand_key();
    dir_key_t k;
    k.data_y0 = 61'({$urandom, $urandom}) | 61'd1;
    k.sync_y0 = 61'({$urandom, $urandom}) | 61'd1;
    for (int i = 0; i < 4; i++) begin
      k.data_stm[i].x0    = {$urandom, $urandom};
      k.data_stm[i].gamma = {$urandom, $urandom};
    end
    k.sync_stm.x0    = {$urandom, $urandom};
    k.sync_stm.gamma = {$urandom, $urandom};
    return k;
  endfunction

  // bit-serial 10GBASE-R scrambler and descrambler on the 64 payload bits
  function automatic logic [63:0] ref_scramble(input logic [63:0] p, inout logic [57:0] s);
    logic [63:0] o;
    for (int i = 0; i < 64; i++) begin
      o[i] = p[i] ^ s[38] ^ s[57];
      s = {s[56:0], o[i]};
    end
    return o;
  endfunction
  function automatic logic [63:0] ref_descramble(input logic [63:0] p, inout logic [57:0] s);
    logic [63:0] o;
    for (int i = 0; i < 64; i++) begin
      o[i] = p[i] ^ s[38] ^ s[57];
      s = {s[56:0], p[i]};
    end
    return o;
  endfunction

  function automatic logic [65:0] rand_data_block();
    return {$urandom, $urandom, SH_DATA};
  endfunction

  // Random XGMII word of block format cls (0 data, 1 all control, 2 0x2D,
  // 3 0x33, 4 0x66, 5 0x55, 6 0x78, 7 0x4B, 8+k terminate in lane k) and the
  // 66-bit block it must encode to, assembled field by field as a bit list,
  // block bit 0 first, following the clause-49 format table.
  class ref_xgmii;
    bit bits[$];
    logic [63:0] txd;
    logic [7:0]  txc;
    logic [65:0] blk;
    function void put(logic [7:0] v, int n);
      for (int i = 0; i < n; i++) bits.push_back(v[i]);
    endfunction
    function void lane(int i, logic [7:0] v, bit c);
      txd[8*i +: 8] = v; txc[i] = c;
    endfunction
    function void ctl(int i);  // random control character and its code
      int r = $urandom % 6;
      logic [7:0] ch = (r < 3) ? 8'h07 : (r == 3) ? 8'hFE : (r == 4) ? 8'h06 : 8'h1C;
      logic [7:0] cd = (r < 3) ? 8'h00 : (r == 3) ? 8'h1E : (r == 4) ? 8'h06 : 8'h2D;
      lane(i, ch, 1); put(cd, 7);
    endfunction
    function void dat(int i);
      logic [7:0] v = 8'($urandom);
      lane(i, v, 0); put(v, 8);
    endfunction
    function void ord(int i);
      bit f = 1'($urandom % 2);
      lane(i, f ? 8'h5C : 8'h9C, 1); put(f ? 8'hF : 8'h0, 4);
    endfunction
    function void make(int cls);
      bits.delete(); txd = '0; txc = '0;
      if (cls == 0) begin
        put(8'h1, 1); put(8'h0, 1);     // header 01 as a 2-bit value: bit0 = 1
        for (int i = 0; i < 8; i++) dat(i);
      end else begin
        logic [7:0] ty [16] = '{8'h00, 8'h1E, 8'h2D, 8'h33, 8'h66, 8'h55, 8'h78, 8'h4B,
                               8'h87, 8'h99, 8'hAA, 8'hB4, 8'hCC, 8'hD2, 8'hE1, 8'hFF};
        put(8'h0, 1); put(8'h1, 1);     // header 10: bit0 = 0
        put(ty[cls], 8);
        case (cls)
          1: for (int i = 0; i < 8; i++) ctl(i);
          2: begin for (int i = 0; i < 4; i++) ctl(i); ord(4); for (int i = 5; i < 8; i++) dat(i); end
          3: begin for (int i = 0; i < 4; i++) ctl(i); put(0, 4); lane(4, 8'hFB, 1); for (int i = 5; i < 8; i++) dat(i); end
          4, 5: begin
            logic [7:0] d1 = 8'($urandom), d2 = 8'($urandom), d3 = 8'($urandom);
            lane(1, d1, 0); lane(2, d2, 0); lane(3, d3, 0);
            put(d1, 8); put(d2, 8); put(d3, 8);
            ord(0);
            if (cls == 5) ord(4); else begin put(0, 4); lane(4, 8'hFB, 1); end
            for (int i = 5; i < 8; i++) dat(i);
          end
          6: begin lane(0, 8'hFB, 1); for (int i = 1; i < 8; i++) dat(i); end
          7: begin
            logic [7:0] d1 = 8'($urandom), d2 = 8'($urandom), d3 = 8'($urandom);
            lane(1, d1, 0); lane(2, d2, 0); lane(3, d3, 0);
            put(d1, 8); put(d2, 8); put(d3, 8);
            ord(0);
            for (int i = 4; i < 8; i++) ctl(i);
          end
          default: begin
            int k = cls - 8;
            for (int i = 0; i < k; i++) dat(i);
            lane(k, 8'hFD, 1);
            put(0, 7 - k);
            for (int i = k + 1; i < 8; i++) ctl(i);
          end
        endcase
      end
      for (int i = 0; i < 66; i++) blk[i] = bits[i];
    endfunction
  endclass
endpackage
