// results_crossbar: the low-latency results crossbar of one control-system
// chassis.
//
// Readout-RX sequencers publish each classified result as a message; the
// crossbar takes the messages of all its inputs and broadcasts every one to
// the controller option cards of the chassis, so each sequencer can see
// each qubit's latest result. Chassis are joined in a star with single-hop
// communication: a message that came from this chassis's own readout is
// also sent to every inter-chassis link, while a message that came from
// another chassis is only delivered locally and never forwarded again.
// The roles and the 40 ns budget for handling a message follow the paper;
// the arbitration and buffering are this design's choice.
//
// How it works: every input (NUM_SRC local readout links, then NUM_REMOTE
// inter-chassis links) has a one-message holding register. A round-robin
// arbiter moves one held message per clock to the broadcast output. A
// message arriving at a full holding register that is not being granted is
// dropped and counted in overflow_count; a link delivers at most one message
// every 9 clocks, so with up to 9 inputs this cannot happen. Locally
// produced messages are queued in a FIFO_DEPTH-entry FIFO per outgoing
// inter-chassis link, which is drained with a valid/ready handshake; a full
// FIFO drops and counts the message as well. An inter-chassis serial link
// carries one message per 9 clocks while the local inputs together can
// deliver NUM_SRC per 9 clocks, so the FIFO must absorb the burst of one
// measurement round; 16 entries is this design's choice.
//
// Timing: a message with src_valid/rem_valid high at clock edge n is on
// bcast_valid/bcast_msg after edge n+1 when no other input competes: 2
// clocks, 8 ns at 250 MHz.
module results_crossbar
  import qec_dec_pkg::*;
#(
  parameter int unsigned NUM_SRC    = 6,
  parameter int unsigned NUM_REMOTE = 2,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // local readout-RX sources
  input  logic        [NUM_SRC-1:0] src_valid,
  input  result_msg_t [NUM_SRC-1:0] src_msg,
  // messages from other chassis
  input  logic        [NUM_REMOTE-1:0] rem_valid,
  input  result_msg_t [NUM_REMOTE-1:0] rem_msg,
  // broadcast to the option cards of this chassis
  output logic        bcast_valid,
  output result_msg_t bcast_msg,
  output logic        bcast_local,   // message originated in this chassis
  // messages to other chassis
  output logic        [NUM_REMOTE-1:0] node_out_valid,
  output result_msg_t [NUM_REMOTE-1:0] node_out_msg,
  input  logic        [NUM_REMOTE-1:0] node_out_ready,
  output logic [15:0] overflow_count
);

  localparam int unsigned N   = NUM_SRC + NUM_REMOTE;
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned FAW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  logic        [N-1:0] in_v;
  result_msg_t [N-1:0] in_m;
  logic        [N-1:0] hold_v;
  result_msg_t [N-1:0] hold_m;

  always_comb begin
    for (int i = 0; i < NUM_SRC; i++) begin
      in_v[i] = src_valid[i];
      in_m[i] = src_msg[i];
    end
    for (int j = 0; j < NUM_REMOTE; j++) begin
      in_v[NUM_SRC+j] = rem_valid[j];
      in_m[NUM_SRC+j] = rem_msg[j];
    end
  end

  // Per-link FIFOs towards other chassis.
  result_msg_t [FIFO_DEPTH-1:0] fifo_mem [NUM_REMOTE];
  logic [FAW-1:0]   fifo_rd [NUM_REMOTE];
  logic [FAW-1:0]   fifo_wr [NUM_REMOTE];
  logic [FAW:0]     fifo_cnt [NUM_REMOTE];
  logic [NUM_REMOTE-1:0] fifo_full;

  // Round-robin choice among held messages, starting at rr_ptr.
  logic [NW-1:0] rr_ptr;
  logic          grant_v;
  logic [NW-1:0] grant_idx;

  always_comb begin
    grant_v   = 1'b0;
    grant_idx = '0;
    for (int k = 0; k < N; k++) begin
      logic [NW-1:0] idx;
      idx = NW'((int'(rr_ptr) + k) % N);
      if (!grant_v && hold_v[idx]) begin
        grant_v   = 1'b1;
        grant_idx = idx;
      end
    end
  end

  logic grant_local;
  assign grant_local = grant_v && (int'(grant_idx) < NUM_SRC);

  // Holding registers and overflow counting.
  logic [$clog2(N+NUM_REMOTE+1)-1:0] drops;

  always_comb begin
    drops = '0;
    for (int i = 0; i < N; i++)
      if (in_v[i] && hold_v[i] && !(grant_v && int'(grant_idx) == i))
        drops = drops + 1'b1;
    for (int j = 0; j < NUM_REMOTE; j++)
      if (grant_local && fifo_full[j] && !node_out_ready[j])
        drops = drops + 1'b1;
  end

  logic [NUM_REMOTE-1:0] push, pop;

  always_comb
    for (int j = 0; j < NUM_REMOTE; j++) begin
      fifo_full[j]      = (fifo_cnt[j] == FIFO_DEPTH[FAW:0]);
      pop[j]            = (fifo_cnt[j] != '0) && node_out_ready[j];
      push[j]           = grant_local && (!fifo_full[j] || pop[j]);
      node_out_valid[j] = (fifo_cnt[j] != '0);
      node_out_msg[j]   = fifo_mem[j][fifo_rd[j]];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v         <= '0;
      hold_m         <= '0;
      rr_ptr         <= '0;
      bcast_valid    <= 1'b0;
      bcast_msg      <= '0;
      bcast_local    <= 1'b0;
      overflow_count <= '0;
      for (int j = 0; j < NUM_REMOTE; j++) begin
        fifo_rd[j]  <= '0;
        fifo_wr[j]  <= '0;
        fifo_cnt[j] <= '0;
        fifo_mem[j] <= '0;
      end
    end else begin
      // broadcast the granted message
      bcast_valid <= grant_v;
      bcast_local <= grant_local;
      if (grant_v) begin
        bcast_msg <= hold_m[grant_idx];
        rr_ptr    <= (int'(grant_idx) == N-1) ? '0 : grant_idx + 1'b1;
      end
      // holding registers
      for (int i = 0; i < N; i++) begin
        if (grant_v && int'(grant_idx) == i) hold_v[i] <= 1'b0;
        if (in_v[i] && (!hold_v[i] || (grant_v && int'(grant_idx) == i))) begin
          hold_v[i] <= 1'b1;
          hold_m[i] <= in_m[i];
        end
      end
      // FIFOs towards other chassis: local messages only (single hop)
      for (int j = 0; j < NUM_REMOTE; j++) begin
        if (push[j]) begin
          fifo_mem[j][fifo_wr[j]] <= hold_m[grant_idx];
          fifo_wr[j] <= (int'(fifo_wr[j]) == FIFO_DEPTH-1) ? '0 : fifo_wr[j] + 1'b1;
        end
        if (pop[j])
          fifo_rd[j] <= (int'(fifo_rd[j]) == FIFO_DEPTH-1) ? '0 : fifo_rd[j] + 1'b1;
        if (push[j] && !pop[j])      fifo_cnt[j] <= fifo_cnt[j] + 1'b1;
        else if (pop[j] && !push[j]) fifo_cnt[j] <= fifo_cnt[j] - 1'b1;
      end
      if (drops != '0 && overflow_count != 16'hFFFF)
        overflow_count <= overflow_count + 16'(drops);
    end
  end

endmodule
