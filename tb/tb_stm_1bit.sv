// tb_stm_1bit: checks the sync-header keystream bit against the reference
// generator (own LFSR, noise = LFSR[7:0], output x[0]) over several keys, that
// ready comes 129 clocks after load and that the bit stream is balanced.
module tb_stm_1bit;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, adv, ks_sync, ready;
  logic [60:0] y0;
  stm_key_t key;
  int checks = 0, failures = 0;

  stm_1bit dut (.clk, .rst_n, .load, .y0, .key, .adv, .ks_sync, .ready);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    dir_key_t dk;
    ref_keystream r;
    int ones, n;
    load = 0; adv = 0; y0 = 0; key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ones = 0; n = 0;
    for (int t = 0; t < 4; t++) begin
      int w;
      @(negedge clk);
      dk = rand_key();
      y0 = dk.sync_y0; key = dk.sync_stm;
      r = new(dk);
      load = 1; @(negedge clk); load = 0;
      w = 1;
      while (!ready) begin @(negedge clk); w++; end
      checks++; if (w != 129) begin failures++; $display("FAIL ready after %0d", w); end
      for (int i = 0; i < 2000; i++) begin
        checks++;
        if (ks_sync != r.sync()) begin failures++; $display("FAIL t=%0d i=%0d", t, i); end
        adv = ($urandom % 4) != 0;
        if (adv) begin r.step(); ones += ks_sync; n++; end
        @(negedge clk);
      end
      adv = 0;
    end
    checks++;
    if (ones < n * 45 / 100 || ones > n * 55 / 100) begin
      failures++; $display("FAIL balance %0d of %0d", ones, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
