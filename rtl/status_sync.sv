// status_sync: brings the decoder's status bitfield into the sequencer
// clock domain.
//
// The decoder runs at 156.25 MHz and the sequencer processor at 250 MHz;
// the paper states that signals taken straight from decoder ports, such as
// the status bits, were moved to the sequencer domain by clock-crossing
// logic, without saying how. Here every bit passes through its own
// two-flop synchronizer. That is safe for this bitfield because each bit is
// a level that changes at most once per decode, and the decoder sets the
// result bit one decoder clock before it raises the done bit, so a
// sequencer that waits for done and then reads result in the next clock
// sees a settled value.
//
// Timing: a change of d_src appears on q_dst two or three clk_dst edges
// later. Reset clears the synchronizer.
module status_sync #(
  parameter int unsigned W = 5
) (
  input  logic         clk_dst,
  input  logic         rst_dst_n,
  input  logic [W-1:0] d_src,
  output logic [W-1:0] q_dst
);

  logic [W-1:0] meta;

  always_ff @(posedge clk_dst or negedge rst_dst_n) begin
    if (!rst_dst_n) begin
      meta  <= '0;
      q_dst <= '0;
    end else begin
      meta  <= d_src;
      q_dst <= meta;
    end
  end

endmodule
