// tb_pcs_block_sync: sends blocks as 16-bit words behind a random number of
// junk bits, checks that lock is reached within the hunting time, that every
// block passed on after lock is a sent block in order, that 16 corrupted
// headers in a row drop lock and that the block boundary is found again.
module tb_pcs_block_sync;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] rx_word;
  pcs_blk_t out;
  logic lock;
  int checks = 0, failures = 0;

  pcs_block_sync dut (.clk, .rst_n, .rx_word, .out, .lock);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit line[$];
  logic [65:0] blocks[$];
  int n_lock = 0, n_unlock = 0;
  bit corrupt = 0;

  task automatic add_block();
    logic [65:0] b = rand_data_block();
    if ($urandom % 2) b = idle_block();
    if (corrupt) b[1:0] = 2'b11;
    blocks.push_back(b);
    for (int i = 0; i < 66; i++) line.push_back(b[i]);
  endtask

  initial begin
    bit last_lock = 0;
    bit first_out = 1;
    rx_word = '0;
    // junk prefix, so the boundary is not at bit 0
    for (int i = 0; i < 7 + $urandom % 50; i++) line.push_back($urandom % 2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 60000; cyc++) begin
      @(negedge clk);
      corrupt = (cyc >= 30000 && cyc < 30100);
      while (line.size() < 16) add_block();
      for (int b = 0; b < 16; b++) rx_word[b] = line.pop_front();
      #1;
      if (lock && !last_lock) n_lock++;
      if (!lock && last_lock) n_unlock++;
      last_lock = lock;
      if (out.valid) begin
        // drop sent blocks until this one; after lock nothing may be skipped
        automatic int skipped = 0;
        while (blocks.size() > 0 && blocks[0] != out.data) begin void'(blocks.pop_front()); skipped++; end
        checks++;
        if (blocks.size() == 0) begin failures++; $display("FAIL unknown block at %0d", cyc); end
        else void'(blocks.pop_front());
        if (skipped > 0 && n_lock == 1 && !first_out && cyc < 30000) begin
          failures++; $display("FAIL skipped %0d blocks at %0d", skipped, cyc);
        end
        first_out = 0;
      end
    end
    checks++;
    if (n_lock != 2 || n_unlock != 1) begin failures++; $display("FAIL lock %0d unlock %0d", n_lock, n_unlock); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
