// tb_star_two_chassis: two chassis joined by one inter-chassis link pair,
// the smallest star, with every parameter of the top at its default.
//
// The hub chassis reads out ancillas Q36 and Q38, the satellite Q50 and
// Q52. Each chassis's crossbar broadcasts its own results locally and sends
// them over the link; a result that arrives over the link is delivered to
// that chassis's result table and never sent back (single hop). Per round
// the testbench publishes four fresh outcomes, two on each chassis's
// readout links, and checks that both result tables end up holding all four
// with the right values; that each link carries exactly the results of the
// chassis that sends it; that no result is dropped; and how many clocks a
// result from the other chassis needs (readout link, crossbar, FIFO,
// inter-chassis link, crossbar, table). The original system quotes about
// 240-260 ns for the hop between chassis alone; here the whole path must
// stay within 70 clocks (280 ns). The decoder side of both tops is idle.
module tb_star_two_chassis;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  localparam int NS = 6, NR = 2, A = 4, ROUNDS = 200;

  logic clk_seq = 0, clk_dec = 0, rst_seq_n = 0, rst_dec_n = 0;
  always #2   clk_seq = ~clk_seq;   // 250 MHz
  always #3.2 clk_dec = ~clk_dec;   // 156.25 MHz

  // per chassis: 0 = hub, 1 = satellite
  logic [NS-1:0]       rx_ser [2];
  logic [NR-1:0]       nin [2], nout [2];
  logic [15:0]         ovf [2], rxc [2];
  logic                clr [2];
  logic [QW-1:0]       rd_q [2];
  logic                rd_v [2], rd_f [2];

  initial begin
    rx_ser = '{default: '0};
    clr    = '{default: 1'b0};
    rd_q   = '{default: '0};
  end

  // the star: hub link 0 <-> satellite link 0; link 1 unused on both
  assign nin[0] = {1'b0, nout[1][0]};
  assign nin[1] = {1'b0, nout[0][0]};

  for (genvar c = 0; c < 2; c++) begin : g_ch
    logic io_busy, io_rsp_valid, eng_start;
    logic [WB_DW-1:0] io_rdata;
    logic [STATUS_W-1:0] status_seq;
    logic [NUM_ANC*25-1:0] eng_det;
    logic [4:0] eng_num_layers;
    logic [NUM_ANC-1:0] eng_obs_mask;
    qec_decoder_top u_top (
      .clk_seq, .rst_seq_n, .clk_dec, .rst_dec_n,
      .rx_ser(rx_ser[c]), .node_in_ser(nin[c]), .node_out_ser(nout[c]),
      .xbar_overflow_count(ovf[c]),
      .res_clear(clr[c]), .res_rd_qubit(rd_q[c]), .res_rd_value(rd_v[c]),
      .res_rd_fresh(rd_f[c]), .res_rx_count(rxc[c]),
      .io_valid(1'b0), .io_we(1'b0), .io_addr('0), .io_wdata('0),
      .io_busy, .io_rsp_valid, .io_rdata, .status_seq,
      .eng_start, .eng_det, .eng_num_layers, .eng_obs_mask,
      .eng_done(1'b0), .eng_result(1'b0));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  localparam int ANC_Q [A]     = '{36, 38, 50, 52};
  localparam int ANC_CH [A]    = '{0, 0, 1, 1};    // chassis that reads it out
  localparam int ANC_LINK [A]  = '{0, 3, 1, 5};    // readout link on that chassis

  // serial readout frames, one driver per readout link and chassis
  result_msg_t q_tx [2][NS][$];
  task automatic send_frame(input int c, input int link, input result_msg_t m);
    logic [MSG_W:0] f;
    f = {m, 1'b1};
    for (int b = 0; b <= MSG_W; b++) begin
      @(negedge clk_seq);
      rx_ser[c][link] = f[b];
    end
    @(negedge clk_seq);
    rx_ser[c][link] = 1'b0;
  endtask
  for (genvar c = 0; c < 2; c++) begin : g_drv
    for (genvar l = 0; l < NS; l++) begin : g_l
      initial forever begin
        @(negedge clk_seq);
        if (q_tx[c][l].size() > 0) send_frame(c, l, q_tx[c][l].pop_front());
      end
    end
  end

  // what each chassis sends on its link 0
  int link_seen [2][int];
  int link_total [2];
  for (genvar c = 0; c < 2; c++) begin : g_mon
    initial begin
      link_total[c] = 0;
      forever begin
        logic [MSG_W-1:0] m;
        @(negedge clk_seq);
        if (rst_seq_n && nout[c][0]) begin
          for (int b = 0; b < MSG_W; b++) begin
            @(negedge clk_seq);
            m[b] = nout[c][0];
          end
          link_seen[c][int'(m)]++;
          link_total[c]++;
        end
      end
    end
  end

  int seq_clk = 0;
  always @(posedge clk_seq) seq_clk++;

  // mechanisms
  int n_local = 0, n_remote = 0, worst_local = 0, worst_remote = 0;
  int sent [2];

  initial begin
    logic [A-1:0] v;
    int t_pub, t_seen [2][A];
    bit done_all;
    sent = '{0, 0};
    repeat (4) @(negedge clk_seq);
    rst_seq_n = 1; rst_dec_n = 1;
    repeat (4) @(negedge clk_seq);

    for (int r = 0; r < ROUNDS; r++) begin
      @(negedge clk_seq);
      clr = '{1'b1, 1'b1};
      @(negedge clk_seq);
      clr = '{1'b0, 1'b0};
      v = 4'($urandom);
      for (int i = 0; i < A; i++) begin
        q_tx[ANC_CH[i]][ANC_LINK[i]].push_back(result_msg_t'({7'(ANC_Q[i]), v[i]}));
        sent[ANC_CH[i]]++;
      end
      t_pub = seq_clk;
      t_seen = '{default: -1};
      // poll both tables until every ancilla result is fresh in both
      done_all = 0;
      for (int n = 0; n < 200 && !done_all; n++) begin
        done_all = 1;
        for (int c = 0; c < 2; c++)
          for (int i = 0; i < A; i++) if (t_seen[c][i] < 0) begin
            rd_q[c] = 7'(ANC_Q[i]);
            #0.01;
            if (rd_f[c]) begin
              t_seen[c][i] = seq_clk - t_pub;
              check(rd_v[c] == v[i], "result value in the table");
            end else done_all = 0;
          end
        if (!done_all) @(negedge clk_seq);
      end
      for (int c = 0; c < 2; c++)
        for (int i = 0; i < A; i++) begin
          check(t_seen[c][i] >= 0, "result reached both chassis");
          if (ANC_CH[i] == c) begin
            n_local++;
            if (t_seen[c][i] > worst_local) worst_local = t_seen[c][i];
          end else begin
            n_remote++;
            if (t_seen[c][i] > worst_remote) worst_remote = t_seen[c][i];
            check(t_seen[c][i] <= 70, "result from the other chassis within 70 clocks");
          end
        end
      // rounds are microseconds apart in practice; let the links drain
      repeat (10 + $urandom % 20) @(negedge clk_seq);
    end

    repeat (60) @(negedge clk_seq);
    for (int c = 0; c < 2; c++) begin
      foreach (link_seen[c][k])
        check(ANC_CH[(k >> 1) == 36 ? 0 : (k >> 1) == 38 ? 1 : (k >> 1) == 50 ? 2 : 3] == c,
              "link carries only the sender's own results");
      check(link_total[c] == sent[c], "every own result sent once over the link");
      check(ovf[c] == 0, "no result dropped");
      check(rxc[c] <= 16'(A), "table count since last clear");
    end

    $display("worst delivery: own chassis %0d clocks, other chassis %0d clocks", worst_local, worst_remote);
    $display("mechanisms: local=%0d remote=%0d hub_to_sat=%0d sat_to_hub=%0d",
             n_local, n_remote, link_total[0], link_total[1]);
    check(n_local > 0, "own-chassis deliveries");
    check(n_remote > 0, "other-chassis deliveries");
    check(link_total[0] > 0 && link_total[1] > 0, "traffic both ways");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk_seq);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
