// tb_pcs_gearbox: answers each req with a random block DLY clocks later and
// checks that the 16-bit output words, read as one bit stream, are exactly
// the blocks in order, block bit 0 first; that after start-up there is no
// underflow; and that 33 blocks are asked for every 132 words, the
// 66/16 rate of the line.
module tb_pcs_gearbox;
  import physec_pkg::*;
  localparam int DLY = 4;
  logic clk = 0, rst_n = 0;
  logic req, underflow;
  pcs_blk_t in;
  logic [15:0] tx_word;
  int checks = 0, failures = 0;

  pcs_gearbox dut (.clk, .rst_n, .req, .in, .tx_word, .underflow);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [DLY-1:0] pipe;
  bit sent_bits[$];
  int nreq = 0, nwords = 0, started = 0;

  always @(posedge clk) if (rst_n) begin
    pipe <= {pipe[DLY-2:0], req};
    if (req) nreq++;
  end
  always_comb begin
    in.valid = pipe[DLY-1];
  end
  always @(negedge clk) begin
    if (rst_n && pipe[DLY-1]) begin
      in.data = {$urandom, $urandom, ($urandom % 2) ? SH_CTRL : SH_DATA};
      for (int i = 0; i < 66; i++) sent_bits.push_back(in.data[i]);
    end
  end

  initial begin
    pipe = '0; in.data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 13200; i++) begin
      @(negedge clk);
      #1;
      if (!underflow) started = 1;
      if (started && i > 20) begin
        checks++;
        if (underflow) begin failures++; $display("FAIL underflow at %0d", i); end
        for (int b = 0; b < 16; b++) begin
          if (sent_bits.size() == 0) begin failures++; break; end
          if (tx_word[b] != sent_bits.pop_front()) begin
            failures++; if (failures < 10) $display("FAIL bit mismatch word %0d", i); break;
          end
        end
        nwords++;
      end else if (started) begin
        for (int b = 0; b < 16; b++) void'(sent_bits.pop_front());
      end
    end
    checks++;
    // 13200 words need 3200 blocks; allow the requests still in flight
    if (nreq < 3200 || nreq > 3200 + 2 * 9) begin failures++; $display("FAIL rate nreq=%0d", nreq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
