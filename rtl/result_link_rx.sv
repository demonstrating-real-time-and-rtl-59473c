// result_link_rx: deserializer for the low-latency results links.
//
// Receives the frames of result_link_tx: while idle, a 1 on the line is a
// start bit; the following MSG_W bits, least significant first, form the
// message. msg_valid and msg are registered at the clock edge that samples
// the last bit and msg_valid stays high for one clock, so a message is out
// 1+MSG_W = 9 clocks after the transmitter accepted it. Back-to-back
// frames are received without a gap. The frame is this design's choice
// (the paper gives only the link's purpose and latency). Transmitter and
// receiver share a clock here, whereas a link between cards or chassis
// would add a PHY the paper does not describe.
module result_link_rx
  import qec_dec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ser_in,
  output logic        msg_valid,
  output result_msg_t msg
);

  logic [MSG_W-1:1]           shreg;   // bits received so far
  logic [$clog2(MSG_W+1)-1:0] bits_left;
  logic                       active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      bits_left <= '0;
      active    <= 1'b0;
      msg_valid <= 1'b0;
      msg       <= '0;
    end else begin
      msg_valid <= 1'b0;
      if (!active) begin
        if (ser_in) begin
          active    <= 1'b1;
          bits_left <= MSG_W[$bits(bits_left)-1:0];
        end
      end else begin
        shreg     <= {ser_in, shreg[MSG_W-1:2]};
        bits_left <= bits_left - 1'b1;
        if (bits_left == 1) begin
          active    <= 1'b0;
          msg_valid <= 1'b1;
          msg       <= result_msg_t'({ser_in, shreg[MSG_W-1:1]});
        end
      end
    end
  end

endmodule
