// tb_pcs_scrambler: compares the scrambler with a bit-serial model of
// 1 + x^39 + x^58 over random blocks with pauses; headers must pass
// unchanged and a paused cycle must not move the scrambler state.
module tb_pcs_scrambler;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in, out;
  int checks = 0, failures = 0;

  pcs_scrambler dut (.clk, .rst_n, .in, .out);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [57:0] s;
    pcs_blk_t exp;
    bit have;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    s = '1; have = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (out.valid != exp.valid || (exp.valid && out.data != exp.data)) begin
          failures++; $display("FAIL i=%0d", i);
        end
      end
      in.valid = ($urandom % 8) != 0;
      in.data  = (i % 3 == 0) ? idle_block() : {$urandom, $urandom, 2'($urandom)};
      exp.valid = in.valid;
      if (in.valid) exp.data = {ref_scramble(in.data[65:2], s), in.data[1:0]};
      have = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
