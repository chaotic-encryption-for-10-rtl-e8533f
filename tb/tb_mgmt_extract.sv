// tb_mgmt_extract: sends streams mixing data, idle, Cipher_ON, Cipher_OFF
// and other ordered-set blocks and checks that exactly the two management
// blocks are replaced by idle blocks and reported on evt, one clock later.
module tb_mgmt_extract;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in, out;
  mgmt_msg_e evt;
  int checks = 0, failures = 0;

  mgmt_extract dut (.clk, .rst_n, .in, .out, .evt);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pcs_blk_t exp; mgmt_msg_e exp_evt;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exp = '0; exp_evt = MSG_NONE;
    for (int i = 0; i < 4000; i++) begin
      int r;
      @(negedge clk);
      checks++;
      if (out != exp || evt != exp_evt) begin
        failures++; $display("FAIL i=%0d out=%h exp=%h evt=%0d", i, out.data, exp.data, evt);
      end
      r = $urandom % 10;
      in.valid = ($urandom % 8) != 0;
      in.data  = (r == 0) ? seq_os_block(OS_CIPHER_ON) :
                 (r == 1) ? seq_os_block(OS_CIPHER_OFF) :
                 (r == 2) ? seq_os_block(8'h02) :          // remote fault stays
                 (r == 3) ? idle_block() : rand_data_block();
      exp = in; exp_evt = MSG_NONE;
      if (in.valid && r <= 1) begin
        exp.data = {56'h0, 8'h1E, 2'b10};
        exp_evt  = (r == 0) ? MSG_ON : MSG_OFF;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
