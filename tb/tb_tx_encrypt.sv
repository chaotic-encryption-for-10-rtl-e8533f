// tb_tx_encrypt: runs random traffic (data, idle, pauses) through TX ENCRYPT
// with a keystream source driven by ks_adv, requests Cipher_ON and Cipher_OFF,
// and compares every output block, two clocks after its input, with a model:
// the first idle block after a request becomes the management block,
// Cipher_ON leaves in clear and starts encryption on the next block,
// Cipher_OFF leaves encrypted and stops it. Keystream word n is a fixed hash
// of n, so the model knows which word each block must use.
module tb_tx_encrypt;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in, out;
  logic ins_req, ins_ready, ins_done, active, ks_adv, ks_sync;
  mgmt_msg_e ins_msg;
  logic [63:0] ks_data;
  int ks_idx;
  int checks = 0, failures = 0;
  int n_on = 0, n_off = 0, n_enc = 0;

  function automatic logic [64:0] ks_of(int n);
    logic [31:0] a = 32'(n) * 32'h9E3779B9;
    logic [31:0] b = (32'(n) ^ 32'h5bd1e995) * 32'h85EBCA6B;
    return {a ^ b, b, a[7]};
  endfunction

  tx_encrypt dut (.clk, .rst_n, .in, .out, .ins_req, .ins_msg, .ins_ready, .ins_done,
                  .active, .ks_data, .ks_sync, .ks_adv);
  always #5 clk = ~clk;

  assign {ks_data, ks_sync} = ks_of(ks_idx);
  always_ff @(posedge clk) if (ks_adv) ks_idx <= ks_idx + 1;

  function automatic logic [65:0] enc(logic [65:0] b, int n);
    logic [64:0] k = ks_of(n);
    logic [1:0] h = b[1:0];
    if (k[0]) h = (h == 2'b01) ? 2'b10 : (h == 2'b10) ? 2'b01 : h;
    return {b[65:2] ^ k[64:1], h};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pcs_blk_t q[$];
    mgmt_msg_e pend;
    bit m_act;
    int m_cnt;
    ks_idx = 0;
    in = '0; ins_req = 0; ins_msg = MSG_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pend = MSG_NONE; m_act = 0; m_cnt = 0;
    q.push_back('0); q.push_back('0);
    for (int i = 0; i < 8000; i++) begin
      pcs_blk_t e;
      @(negedge clk);
      e = q.pop_front();
      checks++;
      if (out != e) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d out=%h exp=%h", i, out.data, e.data);
      end
      in.valid = ($urandom % 10) != 0;
      in.data  = ($urandom % 4 == 0) ? idle_block() : rand_data_block();
      ins_req  = ins_ready && ($urandom % 40 == 0);
      ins_msg  = m_act ? MSG_OFF : MSG_ON;
      // model of INSERT
      e = in;
      if (pend != MSG_NONE && in.valid && in.data == idle_block()) begin
        e.data = msg_block(pend); pend = MSG_NONE;
      end else if (ins_req) pend = ins_msg;
      // model of CAPTURE and CIPHER_OP
      if (e.valid) begin
        automatic mgmt_msg_e m = classify(e.data);
        automatic logic [65:0] plain = e.data;
        if (m_act) begin e.data = enc(e.data, m_cnt); n_enc++; end
        if (m_act || m == MSG_ON) m_cnt++;
        if (m == MSG_ON)  begin m_act = 1; n_on++; end
        if (m == MSG_OFF) begin m_act = 0; n_off++; end
        if (plain != e.data && classify(plain) == MSG_ON) failures++;
      end
      q.push_back(e);
    end
    checks++;
    if (n_on < 3 || n_off < 3 || n_enc < 100) begin failures++; $display("FAIL coverage %0d %0d %0d", n_on, n_off, n_enc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
