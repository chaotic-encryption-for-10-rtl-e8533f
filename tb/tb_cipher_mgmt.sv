// tb_cipher_mgmt: checks that commands reach INSERT only when it is ready,
// that Cipher_ON waits for the TX keystream to be ready while Cipher_OFF does
// not, that a later command replaces a waiting one, and that extracted
// management blocks are counted.
module tb_cipher_mgmt;
  import physec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_on, cmd_off, cfg_tx_load, cfg_rx_load, busy;
  logic [15:0] rx_on_cnt, rx_off_cnt;
  logic ins_req, ins_ready, tx_ks_ready, tx_ks_load, rx_ks_load;
  mgmt_msg_e ins_msg, ext_evt;
  int checks = 0, failures = 0;

  cipher_mgmt dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_on, n_off;
    {cmd_on, cmd_off, cfg_tx_load, cfg_rx_load, ins_ready, tx_ks_ready} = '0;
    ext_evt = MSG_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_tx_load = 1; cfg_rx_load = 1; #1;
    check(tx_ks_load && rx_ks_load, "load strobes");
    @(negedge clk); cfg_tx_load = 0; cfg_rx_load = 0;
    // ON while keystream not ready and INSERT busy
    cmd_on = 1; @(negedge clk); cmd_on = 0;
    ins_ready = 1;
    repeat (5) begin #1; check(!ins_req && busy, "ON held until keystream ready"); @(negedge clk); end
    tx_ks_ready = 1; ins_ready = 0;
    repeat (3) begin #1; check(!ins_req && busy, "ON held until INSERT ready"); @(negedge clk); end
    ins_ready = 1; #1;
    check(ins_req && ins_msg == MSG_ON, "ON issued");
    @(negedge clk); #1;
    check(!ins_req && !busy, "ON taken once");
    // OFF does not wait for keystream
    tx_ks_ready = 0; cmd_off = 1; @(negedge clk); cmd_off = 0; #1;
    check(ins_req && ins_msg == MSG_OFF, "OFF issued");
    @(negedge clk);
    // later command replaces waiting one
    ins_ready = 0; tx_ks_ready = 1;
    cmd_off = 1; @(negedge clk); cmd_off = 0; cmd_on = 1; @(negedge clk); cmd_on = 0;
    ins_ready = 1; #1;
    check(ins_req && ins_msg == MSG_ON, "latest command wins");
    @(negedge clk);
    // counters
    n_on = 0; n_off = 0;
    for (int i = 0; i < 200; i++) begin
      automatic int r = $urandom % 3;
      ext_evt = (r == 0) ? MSG_ON : (r == 1) ? MSG_OFF : MSG_NONE;
      if (r == 0) n_on++;
      if (r == 1) n_off++;
      @(negedge clk);
    end
    ext_evt = MSG_NONE; #1;
    check(rx_on_cnt == 16'(n_on) && rx_off_cnt == 16'(n_off), "event counters");
    // random commands and handshakes against a model of the held command
    @(negedge clk);
    begin
      automatic mgmt_msg_e m = ins_msg;
      automatic bit exp_req;
      for (int i = 0; i < 3000; i++) begin
        cmd_on      = ($urandom % 12 == 0);
        cmd_off     = !cmd_on && ($urandom % 12 == 0);
        ins_ready   = ($urandom % 3 != 0);
        tx_ks_ready = ($urandom % 4 != 0);
        #1;
        exp_req = (m != MSG_NONE) && ins_ready && (m != MSG_ON || tx_ks_ready);
        check(ins_req == exp_req, "random: ins_req");
        check(busy == (m != MSG_NONE), "random: busy");
        check(!exp_req || ins_msg == m, "random: ins_msg");
        if (cmd_on) m = MSG_ON;
        else if (cmd_off) m = MSG_OFF;
        else if (exp_req) m = MSG_NONE;
        @(negedge clk);
      end
      cmd_on = 0; cmd_off = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
