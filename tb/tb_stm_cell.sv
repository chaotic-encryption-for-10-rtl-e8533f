// tb_stm_cell: loads keys, checks that ready rises 129 clocks after load,
// that each step is one clock, that the new state equals the fixed-point map
// of the reference model and lies within 1e-9 of the real-valued skew tent
// map, and that steps before ready and without adv leave the state alone.
module tb_stm_cell;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, adv, ready;
  logic [63:0] gamma, x0, x_fb, x;
  int checks = 0, failures = 0;

  stm_cell dut (.clk, .rst_n, .load, .gamma, .x0, .adv, .x_fb, .x, .ready);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s x=%h", what, x); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] exp;
    real ex;
    load = 0; adv = 0; gamma = 0; x0 = 0; x_fb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      int n;
      @(negedge clk);
      gamma = (k == 0) ? 64'h8000_0000_0000_0000 :
              (k == 1) ? 64'h0000_0100_0000_0000 :     // small gamma
              (k == 2) ? 64'hFFFF_FF00_0000_0000 :     // gamma near 1
              {$urandom, $urandom};
      x0 = {$urandom, $urandom};
      load = 1; adv = 1; x_fb = x0;
      @(negedge clk); load = 0;
      check(x == x0, "load x0");
      n = 1;
      while (!ready) begin
        // steps before ready are ignored
        @(negedge clk); n++;
        if (n > 400) break;
      end
      check(n == 129, $sformatf("ready after %0d clocks", n));
      check(x == x0, "no step before ready");
      adv = 0; @(negedge clk);
      check(x == x0, "no step without adv");
      for (int i = 0; i < 200; i++) begin
        x_fb = (i % 2) ? {x[63:8], x[7:0] ^ 8'($urandom)} : x;
        exp  = ref_stm(x_fb, gamma);
        ex   = ref_stm_real(frac(x_fb), frac(gamma));
        adv  = 1;
        @(negedge clk);
        check(x == exp, "fixed-point step");
        check((frac(x) - ex) < 1e-9 && (ex - frac(x)) < 1e-9, "close to real map");
      end
      adv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
