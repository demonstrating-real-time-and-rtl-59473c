// result_link_tx: serializer for the low-latency results links.
//
// A readout-RX sequencer classifies a qubit's readout, turns the result into
// a message and serializes it to the results crossbar; the crossbar likewise
// serializes its broadcasts to the option cards and to other chassis. This
// module is that serializer. The paper gives the link's purpose and its
// latencies (120-160 ns per hop) but not its format; the frame here is this
// design's choice: the line idles at 0, a frame is a 1 start bit followed by
// the MSG_W message bits, least significant first (result bit, then the
// qubit index), one bit per clock.
//
// Interface: msg is taken when msg_valid && msg_ready. msg_ready is high
// while no frame is being sent. ser_out shows the start bit in the clock
// after acceptance; a frame occupies 1+MSG_W = 9 clocks (36 ns at 250 MHz)
// and the next frame may follow immediately.
module result_link_tx
  import qec_dec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        msg_valid,
  input  result_msg_t msg,
  output logic        msg_ready,
  output logic        ser_out
);

  localparam int unsigned FW = MSG_W + 1;

  logic [FW-1:0]          shreg;
  logic [$clog2(FW+1)-1:0] bits_left;

  assign msg_ready = (bits_left == 0) || (bits_left == 1);
  assign ser_out   = shreg[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      bits_left <= '0;
    end else if (msg_valid && msg_ready) begin
      shreg     <= {msg, 1'b1};
      bits_left <= FW[$bits(bits_left)-1:0];
    end else if (bits_left != 0) begin
      shreg     <= {1'b0, shreg[FW-1:1]};
      bits_left <= bits_left - 1'b1;
    end
  end

endmodule
