// tb_rx_decrypt: builds an encrypted line stream the way a transmitter does
// (Cipher_ON in clear, following blocks encrypted, Cipher_OFF encrypted) and
// checks that RX DECRYPT returns the plaintext one clock later, with both
// management blocks replaced by idle blocks and reported on evt. The
// keystream word n is a fixed hash of n, advanced on ks_adv.
module tb_rx_decrypt;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in, out;
  mgmt_msg_e evt;
  logic active, ks_adv, ks_sync;
  logic [63:0] ks_data;
  int ks_idx;
  int checks = 0, failures = 0;
  int n_on = 0, n_off = 0, n_enc = 0;

  function automatic logic [64:0] ks_of(int n);
    logic [31:0] a = 32'(n) * 32'h9E3779B9;
    logic [31:0] b = (32'(n) ^ 32'h5bd1e995) * 32'h85EBCA6B;
    return {a ^ b, b, a[7]};
  endfunction
  function automatic logic [65:0] enc(logic [65:0] b, int n);
    logic [64:0] k = ks_of(n);
    logic [1:0] h = b[1:0];
    if (k[0]) h = (h == 2'b01) ? 2'b10 : (h == 2'b10) ? 2'b01 : h;
    return {b[65:2] ^ k[64:1], h};
  endfunction

  rx_decrypt dut (.clk, .rst_n, .in, .out, .evt, .active, .ks_data, .ks_sync, .ks_adv);
  always #5 clk = ~clk;

  assign {ks_data, ks_sync} = ks_of(ks_idx);
  always_ff @(posedge clk) if (ks_adv) ks_idx <= ks_idx + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pcs_blk_t exp; mgmt_msg_e exp_evt;
    bit t_act; int t_cnt;
    ks_idx = 0;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exp = '0; exp_evt = MSG_NONE; t_act = 0; t_cnt = 0;
    for (int i = 0; i < 8000; i++) begin
      int r;
      pcs_blk_t p;
      @(negedge clk);
      checks++;
      if (out != exp || evt != exp_evt) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d out=%h exp=%h evt=%0d", i, out.data, exp.data, evt);
      end
      checks++;
      if (active != t_act) begin failures++; $display("FAIL active i=%0d", i); end
      r = $urandom % 60;
      p.valid = ($urandom % 10) != 0;
      p.data  = (r == 0) ? seq_os_block(OS_CIPHER_ON) :
                (r == 1) ? seq_os_block(OS_CIPHER_OFF) :
                (r < 15) ? idle_block() : rand_data_block();
      in = p;
      exp = p; exp_evt = MSG_NONE;
      if (p.valid) begin
        automatic mgmt_msg_e m = classify(p.data);
        if (t_act) begin in.data = enc(p.data, t_cnt); n_enc++; end
        if (t_act || m == MSG_ON) t_cnt++;
        if (m != MSG_NONE) begin exp.data = idle_block(); exp_evt = m; end
        if (m == MSG_ON)  begin t_act = 1; n_on++; end
        if (m == MSG_OFF) begin t_act = 0; n_off++; end
      end
    end
    checks++;
    if (n_on < 3 || n_off < 3 || n_enc < 100) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
