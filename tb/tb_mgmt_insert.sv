// tb_mgmt_insert: requests Cipher_ON / Cipher_OFF insertions while data and
// idle blocks flow, and checks that each request replaces exactly the first
// idle block after it (one clock later on the output), that every other block
// passes unchanged with one clock of latency and that ready is low while a
// request waits.
module tb_mgmt_insert;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in, out;
  logic req, ready, done;
  mgmt_msg_e req_msg;
  int checks = 0, failures = 0;
  int n_ins = 0, n_wait = 0;

  mgmt_insert dut (.clk, .rst_n, .in, .out, .req, .req_msg, .ready, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mgmt_msg_e pend;
    pcs_blk_t  exp;
    logic      exp_done;
    in = '0; req = 0; req_msg = MSG_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pend = MSG_NONE;
    exp = '0; exp_done = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      // output of the previous cycle
      checks++;
      if (out != exp || done != exp_done) begin
        failures++; $display("FAIL i=%0d out=%h exp=%h done=%b", i, out.data, exp.data, done);
      end
      checks++;
      if (ready != (pend == MSG_NONE)) begin failures++; $display("FAIL ready i=%0d", i); end
      in.valid = ($urandom % 8) != 0;
      begin
        automatic int r = $urandom % 8;
        // idles, other control blocks (local fault ordered sets) and data
        in.data = (r == 0) ? idle_block() : (r == 1) ? seq_os_block(8'h01) : rand_data_block();
      end
      req      = ($urandom % 10 == 0);
      req_msg  = ($urandom % 2) ? MSG_ON : MSG_OFF;
      exp = in; exp_done = 0;
      if (pend != MSG_NONE && in.valid && in.data == idle_block()) begin
        exp.data = msg_block(pend); exp_done = 1; pend = MSG_NONE; n_ins++;
      end else if (req && pend == MSG_NONE) begin
        pend = req_msg;
      end else if (pend != MSG_NONE) n_wait++;
    end
    checks++;
    if (n_ins < 10 || n_wait == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
