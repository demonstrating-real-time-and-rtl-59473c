// readout_to_seq: the readout-to-sequencer logic of a gate card.
//
// The results crossbar broadcasts every classified result to the option
// cards. On the card this block keeps, for each of the NUM_QUBITS qubits,
// the most recent result and a flag that one has arrived since the last
// clear, so that a sequencer program can load a qubit's latest result into
// its memory. The role follows the paper (latency E in its control-system
// figure, 40-90 ns within a card); the read port is this design's choice.
//
// Interface and timing: a message on in_valid/in_msg is stored at the next
// clock edge and is visible on the combinational read port (rd_qubit ->
// rd_value, rd_fresh) from then on, one clock after it arrived. clear
// forgets every result (a new shot); a message in the same clock as clear
// is kept. Messages for qubit indices >= NUM_QUBITS are ignored. rx_count
// counts the results stored since the last clear.
module readout_to_seq
  import qec_dec_pkg::result_msg_t, qec_dec_pkg::QW;
#(
  parameter int unsigned NUM_QUBITS = 84
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  result_msg_t   in_msg,
  input  logic          clear,
  input  logic [QW-1:0] rd_qubit,
  output logic          rd_value,
  output logic          rd_fresh,
  output logic [15:0]   rx_count
);

  logic [NUM_QUBITS-1:0] value_q;
  logic [NUM_QUBITS-1:0] fresh_q;

  logic in_ok;
  assign in_ok = in_valid && (int'(in_msg.qubit) < NUM_QUBITS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      value_q  <= '0;
      fresh_q  <= '0;
      rx_count <= '0;
    end else begin
      if (clear) begin
        fresh_q  <= '0;
        rx_count <= '0;
      end
      if (in_ok) begin
        value_q[in_msg.qubit] <= in_msg.value;
        fresh_q[in_msg.qubit] <= 1'b1;
        rx_count <= (clear ? 16'd0 : rx_count) + 16'd1;
      end
    end
  end

  always_comb begin
    if (int'(rd_qubit) < NUM_QUBITS) begin
      rd_value = value_q[rd_qubit];
      rd_fresh = fresh_q[rd_qubit];
    end else begin
      rd_value = 1'b0;
      rd_fresh = 1'b0;
    end
  end

endmodule
