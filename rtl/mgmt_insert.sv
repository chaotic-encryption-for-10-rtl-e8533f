// mgmt_insert: the INSERT function. On a request it places one management
// block (Cipher_ON or Cipher_OFF) into the TX 64b/66b stream by replacing the
// next 0x1E block filled with eight /I/ characters, so no frame data is lost
// and the stream rate is unchanged.
//
// Interface: req/msg is a valid/ready handshake; a request is taken when
// req && ready and held until an idle block passes, then done pulses for one
// cycle together with the replaced block on the output. Blocks pass with one
// register stage of latency; pauses (valid 0) pass through unchanged. The
// replacement of an /I/ block follows the paper; the handshake is our own.
module mgmt_insert
  import physec_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  pcs_blk_t   in,
  output pcs_blk_t   out,
  input  logic       req,
  input  mgmt_msg_e  req_msg,
  output logic       ready,
  output logic       done
);
  mgmt_msg_e pend;
  logic      hit;

  assign ready = (pend == MSG_NONE);
  assign hit   = (pend != MSG_NONE) && in.valid && (in.data == idle_block());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= MSG_NONE;
      out  <= '0;
      done <= 1'b0;
    end else begin
      done <= hit;
      out  <= in;
      if (hit) begin
        out.data <= msg_block(pend);
        pend     <= MSG_NONE;
      end else if (req && ready && req_msg != MSG_NONE) begin
        pend <= req_msg;
      end
    end
  end

  // a request is only made for a real message
  a_req_msg: assert property (@(posedge clk) disable iff (!rst_n)
                              req && ready |-> req_msg != MSG_NONE);
endmodule
