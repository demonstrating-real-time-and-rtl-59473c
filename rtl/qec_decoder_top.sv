// qec_decoder_top: the real-time decoding path of the hub chassis.
//
// A stability experiment's ancilla outcomes must reach a decoder that
// sits next to a gate sequencer, be decoded, and the decoder's verdict must
// come back in time for a conditional gate. This top joins the pieces the
// paper describes on that path:
//
//   readout-RX links --+                      +--> result table of the gate
//   (rx_ser)           |                      |    card (readout_to_seq),
//                      +--> results_crossbar -+    read by the sequencer
//   links from other --+    (round robin,     |
//   chassis            |    single hop)       +--> links to other chassis
//   (node_in_ser)                                  (node_out_ser)
//
//   sequencer I/O port --> seq_wb_bridge ==WISHBONE==> decoder_wb_regs
//   (clk_seq, 250 MHz)     (clock crossing)  (clk_dec,  + syndrome_builder
//                                             156.25 MHz)   --> eng_* port
//   status_seq <-- status_sync <-- status bitfield
//
// The decoding engine (Collision Clustering in the paper) is not part of
// this RTL; its start/detector/result signals are the eng_* ports. The
// sequencer processor that runs the experiment program is also outside:
// its I/O-port and result-read signals are ports. The crossbar, the result
// links, the gate card's result table and the status synchronizer run on
// clk_seq. Between the crossbar and the gate card the broadcast is passed
// in parallel, one message per clock, because the width of that link is not
// given; the links from readout cards and between chassis are the one-bit
// serial links of result_link_tx/result_link_rx.
//
// Latency on this path, at 250 MHz: readout link 9 clocks, crossbar 2
// clocks, table 1 clock; to another chassis add the FIFO and 9 more clocks.
module qec_decoder_top
  import qec_dec_pkg::*;
#(
  parameter int unsigned NUM_SRC    = 6,
  parameter int unsigned NUM_REMOTE = 2,
  parameter int unsigned MAX_ROUNDS = 25,
  localparam int unsigned DET_BITS  = NUM_ANC * MAX_ROUNDS,
  localparam int unsigned RW        = $clog2(MAX_ROUNDS + 2)
) (
  input  logic                  clk_seq,
  input  logic                  rst_seq_n,
  input  logic                  clk_dec,
  input  logic                  rst_dec_n,
  // serial result links
  input  logic [NUM_SRC-1:0]    rx_ser,
  input  logic [NUM_REMOTE-1:0] node_in_ser,
  output logic [NUM_REMOTE-1:0] node_out_ser,
  output logic [15:0]           xbar_overflow_count,
  // sequencer: classified results
  input  logic                  res_clear,
  input  logic [QW-1:0]         res_rd_qubit,
  output logic                  res_rd_value,
  output logic                  res_rd_fresh,
  output logic [15:0]           res_rx_count,
  // sequencer: decoder I/O port
  input  logic                  io_valid,
  input  logic                  io_we,
  input  logic [WB_AW-1:0]      io_addr,
  input  logic [WB_DW-1:0]      io_wdata,
  output logic                  io_busy,
  output logic                  io_rsp_valid,
  output logic [WB_DW-1:0]      io_rdata,
  output logic [STATUS_W-1:0]   status_seq,
  // decoding engine (clk_dec domain)
  output logic                  eng_start,
  output logic [DET_BITS-1:0]   eng_det,
  output logic [RW-1:0]         eng_num_layers,
  output logic [NUM_ANC-1:0]    eng_obs_mask,
  input  logic                  eng_done,
  input  logic                  eng_result
);

  // ---------------- results network ----------------
  logic        [NUM_SRC-1:0]    src_valid;
  result_msg_t [NUM_SRC-1:0]    src_msg;
  logic        [NUM_REMOTE-1:0] rem_valid;
  result_msg_t [NUM_REMOTE-1:0] rem_msg;
  logic        [NUM_REMOTE-1:0] nout_valid, nout_ready;
  result_msg_t [NUM_REMOTE-1:0] nout_msg;
  logic                         bcast_valid;
  result_msg_t                  bcast_msg;

  for (genvar i = 0; i < NUM_SRC; i++) begin : g_rx
    result_link_rx u_rx (
      .clk(clk_seq), .rst_n(rst_seq_n),
      .ser_in(rx_ser[i]), .msg_valid(src_valid[i]), .msg(src_msg[i])
    );
  end

  for (genvar j = 0; j < NUM_REMOTE; j++) begin : g_node
    result_link_rx u_nrx (
      .clk(clk_seq), .rst_n(rst_seq_n),
      .ser_in(node_in_ser[j]), .msg_valid(rem_valid[j]), .msg(rem_msg[j])
    );
    result_link_tx u_ntx (
      .clk(clk_seq), .rst_n(rst_seq_n),
      .msg_valid(nout_valid[j]), .msg(nout_msg[j]), .msg_ready(nout_ready[j]),
      .ser_out(node_out_ser[j])
    );
  end

  results_crossbar #(.NUM_SRC(NUM_SRC), .NUM_REMOTE(NUM_REMOTE)) u_xbar (
    .clk(clk_seq), .rst_n(rst_seq_n),
    .src_valid, .src_msg, .rem_valid, .rem_msg,
    .bcast_valid, .bcast_msg, .bcast_local(),
    .node_out_valid(nout_valid), .node_out_msg(nout_msg),
    .node_out_ready(nout_ready),
    .overflow_count(xbar_overflow_count)
  );

  readout_to_seq #(.NUM_QUBITS(NUM_QUBITS)) u_r2s (
    .clk(clk_seq), .rst_n(rst_seq_n),
    .in_valid(bcast_valid), .in_msg(bcast_msg), .clear(res_clear),
    .rd_qubit(res_rd_qubit), .rd_value(res_rd_value), .rd_fresh(res_rd_fresh),
    .rx_count(res_rx_count)
  );

  // ---------------- decoder access ----------------
  logic               wb_cyc, wb_stb, wb_we, wb_ack;
  logic [WB_AW-1:0]   wb_adr;
  logic [WB_DW-1:0]   wb_dat_w, wb_dat_r;
  logic [STATUS_W-1:0] status_dec;

  seq_wb_bridge u_bridge (
    .clk_seq, .rst_seq_n,
    .io_valid, .io_we, .io_addr, .io_wdata, .io_busy, .io_rsp_valid, .io_rdata,
    .clk_dec, .rst_dec_n,
    .wb_cyc, .wb_stb, .wb_we, .wb_adr, .wb_dat_w, .wb_ack, .wb_dat_r
  );

  decoder_wb_regs #(.MAX_ROUNDS(MAX_ROUNDS)) u_dec (
    .clk(clk_dec), .rst_n(rst_dec_n),
    .wb_cyc, .wb_stb, .wb_we, .wb_adr, .wb_dat_w, .wb_ack, .wb_dat_r,
    .eng_start, .eng_det, .eng_num_layers, .eng_obs_mask, .eng_done, .eng_result,
    .status(status_dec)
  );

  status_sync #(.W(STATUS_W)) u_ssync (
    .clk_dst(clk_seq), .rst_dst_n(rst_seq_n), .d_src(status_dec), .q_dst(status_seq)
  );

endmodule
