// tb_pcs_encoder: encodes random XGMII words of all fifteen block formats and
// compares each block with one assembled independently, field by field, from
// the clause-49 format table; also checks that a malformed word (a start
// character in lane 2) becomes an error block, and the one-clock latency.
module tb_pcs_encoder;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic xgmii_valid;
  logic [63:0] xgmii_txd;
  logic [7:0] xgmii_txc;
  pcs_blk_t out;
  int checks = 0, failures = 0;

  pcs_encoder dut (.clk, .rst_n, .xgmii_valid, .xgmii_txd, .xgmii_txc, .out);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ref_xgmii g = new();
    logic [65:0] exp;
    bit ev;
    xgmii_valid = 0; xgmii_txd = '0; xgmii_txc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ev = 0; exp = '0;
    for (int i = 0; i < 6000; i++) begin
      int cls;
      @(negedge clk);
      if (i > 0) begin
        checks++;
        if (out.valid != ev || (ev && out.data != exp)) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d cls=%0d got=%h exp=%h", i, cls, out.data, exp);
        end
      end
      cls = (i < 16) ? i : $urandom % 17;
      if (cls == 16) begin
        // malformed: /S/ in lane 2
        xgmii_txd = {$urandom, $urandom}; xgmii_txc = 8'h04; xgmii_txd[23:16] = 8'hFB;
        exp = {{8{7'h1E}}, 8'h1E, SH_CTRL};
      end else begin
        g.make(cls);
        xgmii_txd = g.txd; xgmii_txc = g.txc; exp = g.blk;
      end
      xgmii_valid = ($urandom % 10) != 0;
      ev = xgmii_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
