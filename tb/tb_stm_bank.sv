// tb_stm_bank: checks the 64-bit payload keystream against the reference
// bank (shared LFSR, generator k uses LFSR[8k+7:8k] and drives bits
// [16k+15:16k]), one new word per adv, no change without adv.
module tb_stm_bank;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, adv, ready;
  logic [60:0] y0;
  stm_key_t [3:0] key;
  logic [63:0] ks_data;
  int checks = 0, failures = 0;

  stm_bank dut (.clk, .rst_n, .load, .y0, .key, .adv, .ks_data, .ready);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    dir_key_t dk;
    ref_keystream r;
    logic [63:0] prev;
    load = 0; adv = 0; y0 = 0; key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk);
      dk = rand_key();
      y0 = dk.data_y0; key = dk.data_stm;
      r = new(dk);
      load = 1; @(negedge clk); load = 0;
      while (!ready) @(negedge clk);
      for (int i = 0; i < 1500; i++) begin
        checks++;
        if (ks_data != r.data()) begin failures++; $display("FAIL t=%0d i=%0d %h %h", t, i, ks_data, r.data()); end
        adv = ($urandom % 4) != 0;
        prev = ks_data;
        if (adv) r.step();
        @(negedge clk);
        if (!adv) begin checks++; if (ks_data != prev) failures++; end
      end
      adv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
