// tb_pcs_descrambler: scrambles random blocks with a bit-serial model started
// from a random state, descrambles them with the block and checks that,
// after the first block (the self-synchronisation time), the plaintext comes
// back exactly, with pauses in between.
module tb_pcs_descrambler;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in, out;
  int checks = 0, failures = 0;

  pcs_descrambler dut (.clk, .rst_n, .in, .out);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [57:0] s;
    pcs_blk_t plain;
    int nblk;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    s = 58'({$urandom, $urandom});
    nblk = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (i > 0 && nblk > 1 && in.valid) begin
        checks++;
        if (!out.valid || out.data != plain.data) begin failures++; $display("FAIL i=%0d", i); end
      end
      plain.valid = ($urandom % 8) != 0;
      plain.data  = {$urandom, $urandom, 2'($urandom)};
      in.valid = plain.valid;
      if (plain.valid) begin
        in.data = {ref_scramble(plain.data[65:2], s), plain.data[1:0]};
        nblk++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
