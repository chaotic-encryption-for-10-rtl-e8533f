// tb_physec_pcs: end-to-end test of the encrypted 10GBASE-R link, at the
// design's full size. Two interfaces A and B are cross-connected through
// their 16-bit serializer/deserializer words (A TX -> B RX, B TX -> A RX),
// each direction with its own key, as in a two-port link test. A third
// interface E listens to A's line with a wrong RX key, like an eavesdropper
// that somehow knows the protocol.
//
// Traffic is random XGMII frames (a start word, data words, a terminate word
// in any lane, other control words now and then) separated by idle gaps;
// a new word is put on the bus only when the interface takes one
// (xgmii_tx_ready, paced by the gearbox). The test
//  - waits for block lock on both sides, then checks that the XGMII words B
//    delivers are exactly the words A was given, in order (nothing lost,
//    added or altered), in clear, encrypted and switching phases alike; the
//    comparison starts at the first data word after lock;
//  - checks that the gearbox takes 16 blocks every 66 clocks and never runs
//    dry once started;
//  - issues Cipher_ON before the keys are loaded (it must wait), then ON/OFF
//    several times while frames flow, so insertion must wait for an idle;
//  - checks, with its own block synchroniser on A's line, that while
//    encrypting the headers are about half 01 and half 10 even when only
//    idles are sent, while in clear idles give only 10;
//  - checks that E, with the wrong key, recovers almost nothing;
//  - counts every mechanism and fails if one never happened.
module tb_physec_pcs;
  import physec_pkg::*;
  import physec_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  typedef struct packed { logic v; logic [63:0] d; logic [7:0] c; } xw_t;
  xw_t a_tx_in, b_tx_in, a_rx_out, b_rx_out, e_rx_out;
  logic [15:0] a_word, b_word, e_word;
  logic a_rdy, b_rdy, e_rdy, a_lock, b_lock, e_lock, a_unf, b_unf, e_unf;
  logic a_on, a_off, b_on, b_off, load;
  dir_key_t k_ab, k_ba, k_bad;
  logic a_busy, a_txa, a_rxa, a_txr, a_rxr, b_busy, b_txa, b_rxa, b_txr, b_rxr;
  logic e_busy, e_txa, e_rxa, e_txr, e_rxr;
  logic [15:0] a_onc, a_offc, b_onc, b_offc, e_onc, e_offc;

  physec_pcs u_a (
    .clk, .rst_n,
    .xgmii_tx_ready(a_rdy), .xgmii_txd(a_tx_in.d), .xgmii_txc(a_tx_in.c),
    .xgmii_rx_valid(a_rx_out.v), .xgmii_rxd(a_rx_out.d), .xgmii_rxc(a_rx_out.c),
    .tx_word(a_word), .rx_word(b_word), .rx_block_lock(a_lock), .tx_underflow(a_unf),
    .cmd_on(a_on), .cmd_off(a_off), .cfg_tx_load(load), .cfg_rx_load(load),
    .tx_key(k_ab), .rx_key(k_ba), .mgmt_busy(a_busy), .tx_active(a_txa),
    .rx_active(a_rxa), .tx_ks_ready(a_txr), .rx_ks_ready(a_rxr),
    .rx_on_cnt(a_onc), .rx_off_cnt(a_offc));

  physec_pcs u_b (
    .clk, .rst_n,
    .xgmii_tx_ready(b_rdy), .xgmii_txd(b_tx_in.d), .xgmii_txc(b_tx_in.c),
    .xgmii_rx_valid(b_rx_out.v), .xgmii_rxd(b_rx_out.d), .xgmii_rxc(b_rx_out.c),
    .tx_word(b_word), .rx_word(a_word), .rx_block_lock(b_lock), .tx_underflow(b_unf),
    .cmd_on(b_on), .cmd_off(b_off), .cfg_tx_load(load), .cfg_rx_load(load),
    .tx_key(k_ba), .rx_key(k_ab), .mgmt_busy(b_busy), .tx_active(b_txa),
    .rx_active(b_rxa), .tx_ks_ready(b_txr), .rx_ks_ready(b_rxr),
    .rx_on_cnt(b_onc), .rx_off_cnt(b_offc));

  physec_pcs u_e (
    .clk, .rst_n,
    .xgmii_tx_ready(e_rdy), .xgmii_txd(64'h0707070707070707), .xgmii_txc(8'hFF),
    .xgmii_rx_valid(e_rx_out.v), .xgmii_rxd(e_rx_out.d), .xgmii_rxc(e_rx_out.c),
    .tx_word(e_word), .rx_word(a_word), .rx_block_lock(e_lock), .tx_underflow(e_unf),
    .cmd_on(1'b0), .cmd_off(1'b0), .cfg_tx_load(load), .cfg_rx_load(load),
    .tx_key(k_bad), .rx_key(k_bad), .mgmt_busy(e_busy), .tx_active(e_txa),
    .rx_active(e_rxa), .tx_ks_ready(e_txr), .rx_ks_ready(e_rxr),
    .rx_on_cnt(e_onc), .rx_off_cnt(e_offc));

  // monitor: block synchroniser on A's line, to look at the raw headers
  pcs_blk_t mon_blk;
  logic     mon_lock;
  pcs_block_sync u_mon (.clk, .rst_n, .rx_word(a_word), .out(mon_blk), .lock(mon_lock));

  int checks = 0, failures = 0;
  int n_on_wait_key = 0, n_ins_wait = 0, n_hold = 0, n_enc_blocks = 0;
  int n_e_wrong = 0, n_e_total = 0, n_a_taken = 0, n_b_cmp = 0, n_a_cmp = 0;
  int hdr_ctrl_enc = 0, hdr_total_enc = 0, hdr_ctrl_clear = 0, hdr_total_clear = 0;
  int cycle = 0, idle_cnt = 0, rate_t0 = 0;
  bit waiting = 0, b_sync = 0, a_sync = 0;
  int msgs_seen = 0, b_rxn = 0, a_rxn = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // traffic source: frames of 1..40 words, gaps of 1..30 idle words
  int frame_left = 0, gap_left = 5;
  bit only_idle = 0;
  ref_xgmii gen = new();
  localparam xw_t IDLE_W = '{v: 1'b1, d: {8{8'h07}}, c: 8'hFF};
  function automatic xw_t word_of(int cls);
    xw_t w;
    gen.make(cls);
    w.v = 1'b1; w.d = gen.txd; w.c = gen.txc;
    return w;
  endfunction
  function automatic xw_t next_word(input bit ab);
    xw_t w = IDLE_W;
    if (ab && !only_idle) begin
      if (frame_left > 1) begin w = word_of(0); frame_left--; end
      else if (frame_left == 1) begin w = word_of(8 + $urandom % 8); frame_left = 0; gap_left = 1 + $urandom % 30; end
      else if (gap_left > 0) begin
        gap_left--;
        if ($urandom % 10 == 0) w = word_of(1 + $urandom % 2);      // other control words
        if (gap_left == 0) begin w = word_of(($urandom % 2 != 0) ? 6 : 3); frame_left = 1 + $urandom % 40; end
      end
    end else if (!ab && $urandom % 3 == 0) w = word_of($urandom % 16);
    return w;
  endfunction

  xw_t a_sent[$], b_sent[$];

  // compare a delivered word with the sent queue; before sync, align on the
  // first data word (data words are random, so the match is unambiguous)
  task automatic take(input xw_t got, ref xw_t sent[$], ref bit sync, ref int n, ref int ncmp,
                      input string what);
    int idx[$];
    n++;
    if (!sync) begin
      if (n > 4 && got.c == 8'h00) begin
        idx = sent.find_first_index(x) with (x.c == 8'h00 && x.d == got.d);
        if (idx.size() > 0) begin
          repeat (idx[0] + 1) void'(sent.pop_front());
          sync = 1;
        end
      end
    end else begin
      automatic xw_t e = sent.pop_front();
      ncmp++;
      check(sent.size() >= 0 && got.d == e.d && got.c == e.c, what);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    cycle++;
    // the word now on the bus is taken at the next edge when ready
    if (a_rdy) begin a_tx_in = next_word(1); a_sent.push_back(a_tx_in); n_a_taken++; end
    else n_hold++;
    if (b_rdy) begin b_tx_in = next_word(0); b_sent.push_back(b_tx_in); end
    if (cycle > 200) begin
      check(!a_unf && !b_unf, "gearbox never runs dry");
    end
    if (b_lock && b_rx_out.v) take(b_rx_out, a_sent, b_sync, b_rxn, n_b_cmp, "A->B word delivered intact");
    if (a_lock && a_rx_out.v) take(a_rx_out, b_sent, a_sync, a_rxn, n_a_cmp, "B->A word delivered intact");
    if (b_rx_out.v || e_rx_out.v) begin
      check(b_rx_out.v == e_rx_out.v, "eavesdropper receives the same block stream");
      if (b_sync) begin
        n_e_total++;
        if (e_rx_out.d != b_rx_out.d || e_rx_out.c != b_rx_out.c) n_e_wrong++;
      end
    end
    idle_cnt = only_idle ? idle_cnt + 1 : 0;
    if (mon_blk.valid) begin
      // headers on the line while only idles are being sent
      if (b_rxa && idle_cnt > 600) begin hdr_total_enc++; hdr_ctrl_enc += (mon_blk.data[1:0] == SH_CTRL); end
      if (!b_rxa && idle_cnt > 600 && !a_txa) begin hdr_total_clear++; hdr_ctrl_clear += (mon_blk.data[1:0] == SH_CTRL); end
      check(mon_blk.data[1:0] == SH_CTRL || mon_blk.data[1:0] == SH_DATA, "line header is 01 or 10");
    end
    if (a_txa && a_rdy) n_enc_blocks++;
    // a command is waiting for an idle block while frame data goes by
    if (int'(b_onc) + int'(b_offc) != msgs_seen) begin waiting = 0; msgs_seen = int'(b_onc) + int'(b_offc); end
    if (waiting && a_txr && a_rdy && a_tx_in != IDLE_W) n_ins_wait++;
  end

  task automatic cmd(input bit on);
    @(negedge clk);
    waiting = 1;
    if (on) begin a_on = 1; b_on = 1; end else begin a_off = 1; b_off = 1; end
    @(negedge clk);
    a_on = 0; b_on = 0; a_off = 0; b_off = 0;
  endtask

  initial begin
    int t0, taken0;
    a_tx_in = IDLE_W; b_tx_in = IDLE_W;
    a_on = 0; a_off = 0; b_on = 0; b_off = 0; load = 0;
    k_ab = rand_key(); k_ba = rand_key(); k_bad = k_ab;
    k_bad.data_stm[2].x0[0] = ~k_bad.data_stm[2].x0[0];  // one key bit off
    k_bad.sync_stm.gamma[0] = ~k_bad.sync_stm.gamma[0];
    repeat (4) @(posedge clk);
    rst_n = 1;
    // clear traffic until both sides have lock and deliver in order
    while (!a_sync || !b_sync) @(negedge clk);
    check(e_lock && mon_lock, "eavesdropper and monitor locked");
    t0 = cycle; taken0 = n_a_taken;
    repeat (6600) @(negedge clk);
    check(n_a_taken - taken0 == 1600, $sformatf("16 blocks per 66 clocks (%0d in 6600)", n_a_taken - taken0));
    // Cipher_ON before any key is loaded: must wait
    cmd(1);
    repeat (200) begin
      @(negedge clk);
      if (a_busy && !a_txr) n_on_wait_key++;
      check(!a_txa, "no encryption before the key is ready");
    end
    @(negedge clk); load = 1; t0 = cycle; @(negedge clk); load = 0;
    while (!a_txr) @(negedge clk);
    check(cycle - t0 == 129, $sformatf("key ready %0d clocks after load", cycle - t0));
    for (int round = 0; round < 4; round++) begin
      while (!b_rxa || !a_rxa) @(negedge clk);
      repeat (12000) @(negedge clk);
      // idle-only phase while encrypted
      only_idle = 1; repeat (6000) @(negedge clk); only_idle = 0;
      cmd(0);
      while (b_rxa || a_rxa) @(negedge clk);
      repeat (6000) @(negedge clk);
      if (round == 0) begin only_idle = 1; repeat (3000) @(negedge clk); only_idle = 0; end
      if (round < 3) cmd(1);
    end
    repeat (400) @(negedge clk);
    // counts of mechanisms
    $display("on_wait_key=%0d ins_wait=%0d holds=%0d enc_blocks=%0d compared A->B %0d B->A %0d",
             n_on_wait_key, n_ins_wait, n_hold, n_enc_blocks, n_b_cmp, n_a_cmp);
    $display("B: on=%0d off=%0d A: on=%0d off=%0d", b_onc, b_offc, a_onc, a_offc);
    $display("eavesdropper wrong %0d of %0d; encrypted idle headers 10: %0d of %0d; clear: %0d of %0d",
             n_e_wrong, n_e_total, hdr_ctrl_enc, hdr_total_enc, hdr_ctrl_clear, hdr_total_clear);
    check(n_on_wait_key > 0, "ON waited for key");
    check(n_ins_wait > 0, "insertion waited for an idle block");
    check(n_hold > 0, "gearbox paced the block stream");
    check(n_enc_blocks > 1000, "blocks encrypted");
    check(n_b_cmp > 20000 && n_a_cmp > 20000, "words compared both ways");
    check(a_sent.size() < 40 && b_sent.size() < 40, "no words left undelivered");
    check(b_onc == 4 && b_offc == 4 && a_onc == 4 && a_offc == 4, "four ON and four OFF each way");
    check(e_onc >= 1, "eavesdropper saw the clear Cipher_ON");
    check(n_e_wrong > n_e_total / 3, "wrong key garbles traffic");
    check(hdr_total_enc > 1000 && hdr_ctrl_enc > hdr_total_enc * 45 / 100 &&
          hdr_ctrl_enc < hdr_total_enc * 55 / 100, "encrypted idle headers look random");
    check(hdr_total_clear > 100 && hdr_ctrl_clear == hdr_total_clear, "clear idle headers all 10");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
