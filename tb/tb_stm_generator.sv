// tb_stm_generator: feeds random LFSR noise and checks the 16-bit output
// against a reference generator: x~ = {x[63:8], x[7:0] ^ noise}, next state
// is the skew tent map of x~, and the output is x[15:0].
module tb_stm_generator;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, adv, ready;
  stm_key_t key;
  logic [7:0] noise;
  logic [15:0] ks;
  int checks = 0, failures = 0;

  stm_generator dut (.clk, .rst_n, .load, .key, .adv, .noise, .ks, .ready);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] xr;
    load = 0; adv = 0; noise = 0; key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      @(negedge clk);
      key.gamma = {$urandom, $urandom};
      key.x0 = (t == 0) ? 64'd0 : {$urandom, $urandom};  // 0 escapes only by noise
      load = 1; @(negedge clk); load = 0;
      while (!ready) @(negedge clk);
      xr = key.x0;
      for (int i = 0; i < 500; i++) begin
        checks++;
        if (ks != xr[15:0]) begin failures++; $display("FAIL t=%0d i=%0d ks=%h exp=%h", t, i, ks, xr[15:0]); end
        adv = ($urandom % 3) != 0;
        noise = 8'($urandom);
        if (adv) xr = ref_stm({xr[63:8], xr[7:0] ^ noise}, key.gamma);
        @(negedge clk);
      end
      adv = 0;
      checks++;
      if (t == 0 && xr == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
