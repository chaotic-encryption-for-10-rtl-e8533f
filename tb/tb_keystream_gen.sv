// tb_keystream_gen: checks the keystream of one direction (64-bit data word
// and sync bit) against the reference, that ready is low until both parts
// are loaded, and that an adv before ready does not move the keystream.
module tb_keystream_gen;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, adv, ready, ks_sync;
  dir_key_t key;
  logic [63:0] ks_data;
  int checks = 0, failures = 0;

  keystream_gen dut (.clk, .rst_n, .load, .key, .adv, .ks_data, .ks_sync, .ready);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ref_keystream r;
    load = 0; adv = 0; key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      key = rand_key();
      r = new(key);
      load = 1; @(negedge clk); load = 0;
      adv = 1;
      repeat (60) @(negedge clk);
      checks++; if (ready) failures++;
      while (!ready) @(negedge clk);
      for (int i = 0; i < 1500; i++) begin
        checks++;
        if (ks_data != r.data() || ks_sync != r.sync()) begin
          failures++; $display("FAIL t=%0d i=%0d", t, i);
        end
        adv = ($urandom % 5) != 0;
        if (adv) r.step();
        @(negedge clk);
      end
      adv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
