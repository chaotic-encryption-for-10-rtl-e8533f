// tb_cipher_op: checks the block cipher operation against the rule
// "payload ^ keystream data, header mapped 01->0 / 10->1, XORed with the
// sync keystream and mapped back", that decryption inverts encryption, that
// en = 0 passes blocks unchanged and that a corrupt header is left alone.
module tb_cipher_op;
  import physec_pkg::*;
  logic        en;
  logic [65:0] d_in, d_out, d_back;
  logic [63:0] ksd;
  logic        kss;
  int checks = 0, failures = 0;

  cipher_op u_enc (.en, .d_in, .ks_data(ksd), .ks_sync(kss), .d_out);
  cipher_op u_dec (.en, .d_in(d_out), .ks_data(ksd), .ks_sync(kss), .d_out(d_back));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s d_in=%h d_out=%h", what, d_in, d_out); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] exp_h;
    for (int i = 0; i < 2000; i++) begin
      en   = (i % 5) != 0;
      d_in = {$urandom, $urandom, ($urandom % 2) ? SH_CTRL : SH_DATA};
      if (i % 97 == 0) d_in[1:0] = (i % 2) ? 2'b00 : 2'b11;
      ksd  = {$urandom, $urandom};
      kss  = $urandom;
      #1;
      if (!en) begin
        check(d_out == d_in, "bypass");
      end else begin
        check(d_out[65:2] == (d_in[65:2] ^ ksd), "payload xor");
        if (d_in[1:0] == 2'b00 || d_in[1:0] == 2'b11) exp_h = d_in[1:0];
        else begin
          // header 01 stands for 0, 10 for 1
          exp_h = ((d_in[1:0] == 2'b10) != kss) ? 2'b10 : 2'b01;
        end
        check(d_out[1:0] == exp_h, "header");
        check(d_back == d_in, "round trip");
      end
    end
    // header toggles exactly when the sync keystream bit is 1
    en = 1; d_in = {64'h0, SH_DATA}; ksd = '0; kss = 1; #1;
    check(d_out == {64'h0, SH_CTRL}, "01 with ks 1 -> 10");
    kss = 0; #1;
    check(d_out == d_in, "01 with ks 0 -> 01");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
