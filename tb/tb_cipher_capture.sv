// tb_cipher_capture: drives random streams with Cipher_ON and Cipher_OFF
// blocks and pauses, and checks that active changes on the block after each
// management block and that ks_adv is high for blocks handled while active
// and for Cipher_ON blocks.
module tb_cipher_capture;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t blk;
  logic active, ks_adv;
  mgmt_msg_e msg;
  int checks = 0, failures = 0;
  bit exp_active;
  int n_on = 0, n_off = 0;

  cipher_capture dut (.clk, .rst_n, .blk, .active, .ks_adv, .msg);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    blk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exp_active = 0;
    for (int i = 0; i < 3000; i++) begin
      int r;
      @(negedge clk);
      r = $urandom % 20;
      blk.valid = (r != 0);
      blk.data  = (r == 1) ? seq_os_block(OS_CIPHER_ON) :
                  (r == 2) ? seq_os_block(OS_CIPHER_OFF) :
                  (r == 3) ? idle_block() :
                  (r == 4) ? seq_os_block(8'h01) : rand_data_block();
      #1;
      checks++;
      if (active != exp_active || ks_adv != (blk.valid && (exp_active || r == 1))) begin
        failures++;
        $display("FAIL i=%0d r=%0d active=%b exp=%b adv=%b", i, r, active, exp_active, ks_adv);
      end
      checks++;
      if (msg != (!blk.valid ? MSG_NONE : r == 1 ? MSG_ON : r == 2 ? MSG_OFF : MSG_NONE)) begin
        failures++; $display("FAIL msg i=%0d", i);
      end
      if (blk.valid && r == 1) begin exp_active = 1; n_on++; end
      if (blk.valid && r == 2) begin exp_active = 0; n_off++; end
    end
    checks++;
    if (n_on == 0 || n_off == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
