// tb_pcs_decoder: feeds blocks of all fifteen formats, assembled from the
// clause-49 format table, and checks that the XGMII word of each comes back
// one clock later; blocks with a 00/11 header or an unknown type must decode
// to eight /E/ characters.
module tb_pcs_decoder;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pcs_blk_t in;
  logic xgmii_valid;
  logic [63:0] xgmii_rxd;
  logic [7:0] xgmii_rxc;
  int checks = 0, failures = 0;

  pcs_decoder dut (.clk, .rst_n, .in, .xgmii_valid, .xgmii_rxd, .xgmii_rxc);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ref_xgmii g = new();
    logic [63:0] ed; logic [7:0] ec; bit ev;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ev = 0;
    for (int i = 0; i < 6000; i++) begin
      int cls;
      @(negedge clk);
      if (i > 0) begin
        checks++;
        if (xgmii_valid != ev || (ev && (xgmii_rxd != ed || xgmii_rxc != ec))) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d got=%h/%h exp=%h/%h", i, xgmii_rxd, xgmii_rxc, ed, ec);
        end
      end
      cls = (i < 16) ? i : $urandom % 18;
      if (cls >= 16) begin
        in.data = {$urandom, $urandom, (cls == 16) ? 2'b00 : 2'b11};
        if (i % 2) in.data = {56'h0, 8'h42, SH_CTRL};     // unknown type
        ed = {8{8'hFE}}; ec = 8'hFF;
      end else begin
        g.make(cls);
        in.data = g.blk; ed = g.txd; ec = g.txc;
      end
      in.valid = ($urandom % 10) != 0;
      ev = in.valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
