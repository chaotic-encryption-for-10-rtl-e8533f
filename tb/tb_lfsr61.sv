// tb_lfsr61: checks loading, holding without adv and stepping against the
// recurrence of x^61 + x^5 + x^2 + x + 1 written as a bit sequence
// b[n+61] = b[n] ^ b[n+56] ^ b[n+59] ^ b[n+60], with s[0] the newest bit.
module tb_lfsr61;
  import physec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, adv;
  logic [60:0] seed, state;
  int checks = 0, failures = 0;
  bit b[$];

  lfsr61 dut (.clk, .rst_n, .load, .seed, .adv, .state);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    load = 0; adv = 0; seed = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk);
      seed = 61'({$urandom, $urandom}) | 61'd1;
      load = 1; @(negedge clk); load = 0;
      checks++; if (state != seed) failures++;
      // sequence so far, oldest first: seed[60] ... seed[0]
      b.delete();
      for (int i = 60; i >= 0; i--) b.push_back(seed[i]);
      for (int i = 0; i < 1000; i++) begin
        adv = ($urandom % 4) != 0;
        @(negedge clk);
        if (adv) begin
          automatic int n = b.size() - 61;
          b.push_back(b[n] ^ b[n+56] ^ b[n+59] ^ b[n+60]);
        end
        checks++;
        for (int j = 0; j < 61; j++)
          if (state[j] != b[b.size()-1-j]) begin
            failures++; $display("FAIL t=%0d i=%0d bit %0d", t, i, j); break;
          end
      end
      adv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
