// tb_qec_decoder_top: end-to-end test of the hub chassis's decoding path,
// with every parameter at its default.
//
// The testbench plays the parts around the RTL: the readout-RX sequencers
// and another chassis (serial result frames), the sequencer program (I/O
// port accesses and result-table reads) and, through cc_engine_model, the
// decoding engine. Shots of 2, 9 and 26 measurement rounds, one of every
// length from 5 to 25 decoding rounds, and a few random ones are run. Each
// shot is a stability-8 experiment: ancillas Q36 and
// Q38 are read out in this chassis, Q50 and Q52 arrive from another
// chassis. Per round the ancilla outcomes (unreset ancillas, random
// stabilizer values and misreads) are published; the program waits for all
// four fresh results, buffers them, and after the last round packs them
// into 32-bit words, writes them to the decoder, starts it, polls the
// status until done, reads the result and applies the conditional X
// (counted) or idles. Checked against the testbench's own computation:
// each result reaches the table with the right value within the budget
// the original system gives the readout-link, crossbar and card hops
// (450 ns = 112 clocks); local results and no remote ones leave on every
// inter-chassis link; the decoder result, defect count and cycle count; the
// control overhead after the last round (response time minus decode time)
// at most 370 sequencer clocks; that no result is dropped. Mechanisms that
// must each occur at least once: local and remote results, forwarding to
// another chassis, clock-crossing reads and writes, decodes ending in X and
// in idle, a busy status seen while polling, the measurement overflow and
// bad-round flags.
module tb_qec_decoder_top;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  localparam int NS = 6, NR = 2, MR = 25, A = 4, DB = A * MR;
  localparam int BASE = 4, PERD = 3;

  logic clk_seq = 0, clk_dec = 0, rst_seq_n = 0, rst_dec_n = 0;
  logic [NS-1:0] rx_ser = '0;
  logic [NR-1:0] node_in_ser = '0, node_out_ser;
  logic [15:0] xbar_overflow_count, res_rx_count;
  logic res_clear = 0;
  logic [QW-1:0] res_rd_qubit = '0;
  logic res_rd_value, res_rd_fresh;
  logic io_valid = 0, io_we = 0;
  logic [WB_AW-1:0] io_addr = '0;
  logic [WB_DW-1:0] io_wdata = '0, io_rdata;
  logic io_busy, io_rsp_valid;
  logic [STATUS_W-1:0] status_seq;
  logic eng_start, eng_done, eng_result;
  logic [DB-1:0] eng_det;
  logic [4:0] eng_num_layers;
  logic [A-1:0] eng_obs_mask;

  always #2   clk_seq = ~clk_seq;   // 250 MHz
  always #3.2 clk_dec = ~clk_dec;   // 156.25 MHz

  qec_decoder_top dut (.*);

  cc_engine_model #(.DET_BITS(DB), .NUM_ANC(A), .RW(5), .BASE(BASE), .PER_DEFECT(PERD)) u_eng (
    .clk(clk_dec), .rst_n(rst_dec_n), .start(eng_start), .det(eng_det),
    .num_layers(eng_num_layers), .obs_mask(eng_obs_mask), .done(eng_done), .result(eng_result));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // mechanism counters
  int n_local = 0, n_remote = 0, n_forwarded = 0, n_io_wr = 0, n_io_rd = 0;
  int worst_prop = 0, worst_ovh = 0;
  int n_x = 0, n_idle = 0, n_busy_seen = 0, n_ovf = 0, n_badr = 0;

  // ancilla qubits and where their results come from
  localparam int ANC_Q [A] = '{36, 38, 50, 52};
  localparam int ANC_LINK [A] = '{0, 1, 0, 1};     // link index
  localparam bit ANC_REMOTE [A] = '{0, 0, 1, 1};   // from another chassis

  // ---------------- serial frame drivers ----------------
  result_msg_t local_q [NS][$];
  result_msg_t remote_q[NR][$];

  task automatic send_frame(input bit remote, input int link, input result_msg_t m);
    logic [MSG_W:0] f;
    f = {m, 1'b1};
    for (int b = 0; b <= MSG_W; b++) begin
      @(negedge clk_seq);
      if (remote) node_in_ser[link] = f[b]; else rx_ser[link] = f[b];
    end
    @(negedge clk_seq);
    if (remote) node_in_ser[link] = 1'b0; else rx_ser[link] = 1'b0;
  endtask

  for (genvar l = 0; l < NS; l++) begin : g_ldrv
    initial forever begin
      @(negedge clk_seq);
      if (local_q[l].size() > 0) send_frame(1'b0, l, local_q[l].pop_front());
    end
  end
  for (genvar l = 0; l < NR; l++) begin : g_rdrv
    initial forever begin
      @(negedge clk_seq);
      if (remote_q[l].size() > 0) send_frame(1'b1, l, remote_q[l].pop_front());
    end
  end

  // ---------------- inter-chassis output monitors ----------------
  int out_seen [NR][int];
  for (genvar l = 0; l < NR; l++) begin : g_omon
    initial forever begin
      logic [MSG_W-1:0] m;
      @(negedge clk_seq);
      if (rst_seq_n && node_out_ser[l]) begin
        for (int b = 0; b < MSG_W; b++) begin
          @(negedge clk_seq);
          m[b] = node_out_ser[l];
        end
        out_seen[l][int'(m)]++;
      end
    end
  end

  // ---------------- sequencer I/O port ----------------
  task automatic io(input bit we, input logic [7:0] a, input logic [31:0] d,
                    output logic [31:0] q);
    @(negedge clk_seq);
    while (io_busy) @(negedge clk_seq);
    io_valid = 1; io_we = we; io_addr = a; io_wdata = d;
    @(negedge clk_seq);
    io_valid = 0;
    while (!io_rsp_valid) @(negedge clk_seq);
    q = io_rdata;
    if (we) n_io_wr++; else n_io_rd++;
  endtask
  task automatic io_wr(input logic [7:0] a, input logic [31:0] d);
    logic [31:0] q;
    io(1'b1, a, d, q);
  endtask

  int seq_clk = 0;
  always @(posedge clk_seq) seq_clk++;

  // ---------------- one stability-8 shot ----------------
  task automatic shot(input int R, input logic [3:0] mask, input int p_flip);
    bit m [MR+2][A];
    bit s [MR+2][A];
    logic [127:0] buffer;
    logic [DB-1:0] ref_det;
    logic [31:0] q;
    int nd, t_pub, t_last_round, t_result, ovh;
    bit exp_res;

    for (int i = 0; i < A; i++) m[0][i] = 0;
    buffer = '0;
    for (int r = 1; r <= R; r++) begin
      // new shot-round: clear the table, publish four outcomes
      @(negedge clk_seq);
      res_clear = 1;
      @(negedge clk_seq);
      res_clear = 0;
      for (int i = 0; i < A; i++) begin
        m[r][i] = m[r-1][i] ^ bit'($urandom % 2) ^ (($urandom % 100) < p_flip);
        if (ANC_REMOTE[i]) remote_q[ANC_LINK[i]].push_back(result_msg_t'({7'(ANC_Q[i]), m[r][i]}));
        else               local_q[ANC_LINK[i]].push_back(result_msg_t'({7'(ANC_Q[i]), m[r][i]}));
      end
      t_pub = seq_clk;
      // program: wait until all four results are fresh, then buffer them
      for (int i = 0; i < A; i++) begin
        res_rd_qubit = 7'(ANC_Q[i]);
        #0.01;
        for (int n = 0; n < 200 && !res_rd_fresh; n++) begin
          @(negedge clk_seq);
          #0.01;
        end
        check(res_rd_fresh, "result arrived");
        check(res_rd_value == m[r][i], "classified result in the table");
        buffer[A*(r-1)+i] = res_rd_value;
        if (ANC_REMOTE[i]) n_remote++; else n_local++;
      end
      check(seq_clk - t_pub <= 112, "readout propagation within 450 ns");
      if (seq_clk - t_pub > worst_prop) worst_prop = seq_clk - t_pub;
      // a QEC round takes about 1.7 us; let the links idle a little
      repeat (20) @(negedge clk_seq);
    end
    t_last_round = seq_clk;
    // reference syndrome: stabilizers from outcomes, detectors from those
    for (int r = 1; r <= R; r++)
      for (int i = 0; i < A; i++) s[r][i] = m[r][i] ^ m[r-1][i];
    ref_det = '0; nd = 0;
    for (int k = 0; k < R - 1; k++)
      for (int i = 0; i < A; i++) begin
        ref_det[A*k+i] = s[k+2][i] ^ s[k+1][i];
        nd += ref_det[A*k+i];
      end
    exp_res = ^(ref_det[3:0] & mask);

    // program: send measurements, decode, poll, read, feed back
    io_wr(REG_ROUNDS, R);
    io_wr(REG_OBS_MASK, 32'(mask));
    for (int w = 0; w < (A * R + 31) / 32; w++) io_wr(REG_MEAS_DATA, buffer[32*w +: 32]);
    io_wr(REG_CTRL, 1);
    do begin
      io(1'b0, REG_STATUS, '0, q);
      if (q[ST_BUSY]) n_busy_seen++;
    end while (!q[ST_DONE]);
    // the synchronized status port agrees
    repeat (4) @(negedge clk_seq);
    check(status_seq[ST_DONE] && status_seq[ST_RESULT] == exp_res, "status port");
    io(1'b0, REG_RESULT, '0, q);
    t_result = seq_clk;
    check(q[0] == exp_res, "decoder result");
    if (q[0]) n_x++; else n_idle++;       // conditional X gate or idle
    io(1'b0, REG_DEFECTS, '0, q);
    check(q == nd, "defect count");
    io(1'b0, REG_CYCLES, '0, q);
    check(int'(q) >= BASE + PERD * nd && int'(q) <= BASE + PERD * nd + 8, "decode cycles");
    check(t_result - t_last_round < 4 * (int'(q) + 60), "response time bounded");
    // control overhead: response time minus the decode itself (decoder
    // clocks scaled to 250 MHz); the paper's control logic took 250-370
    // sequencer clocks
    ovh = (t_result - t_last_round) - (int'(q) * 8 + 4) / 5;
    if (ovh > worst_ovh) worst_ovh = ovh;
    check(ovh <= 370, "control overhead within 370 sequencer clocks");
  endtask

  initial begin
    logic [31:0] q;
    repeat (4) @(negedge clk_seq);
    rst_seq_n = 1; rst_dec_n = 1;

    // error flags through the whole path
    io_wr(REG_ROUNDS, 1);
    io_wr(REG_CTRL, 1);
    io(1'b0, REG_STATUS, '0, q);
    if (q[ST_BADROUNDS]) n_badr++;
    for (int w = 0; w < 5; w++) io_wr(REG_MEAS_DATA, 0);
    io(1'b0, REG_STATUS, '0, q);
    if (q[ST_OVERFLOW]) n_ovf++;
    io_wr(REG_CTRL, 2);
    io(1'b0, REG_STATUS, '0, q);
    check(q[ST_OVERFLOW] == 0 && q[ST_BADROUNDS] == 0, "clear");

    // the paper's run lengths: 2 and 9 rounds with feedback, up to 25
    // decoding rounds (26 measurement rounds)
    shot(2, 4'b1111, 10);
    shot(9, 4'b1111, 10);
    shot(MR + 1, 4'b1111, 10);
    // the logical-error sweep: every run length from 5 to 25 decoding rounds
    for (int d = 5; d <= MR; d++) shot(d + 1, 4'($urandom), 10);
    for (int n = 0; n < 6; n++) shot(2 + $urandom % MR, 4'($urandom), 10);

    // every local result, and no remote one, left on each inter-chassis link
    repeat (40) @(negedge clk_seq);
    for (int l = 0; l < NR; l++) begin
      int tot;
      tot = 0;
      foreach (out_seen[l][k]) begin
        check((k >> 1) == 36 || (k >> 1) == 38, "only local results forwarded");
        tot += out_seen[l][k];
      end
      check(tot == n_local, "every local result forwarded");
      n_forwarded += tot;
    end
    check(xbar_overflow_count == 0, "no result dropped");

    $display("worst round propagation: %0d sequencer clocks", worst_prop);
    $display("worst control overhead after the last round: %0d sequencer clocks", worst_ovh);
    $display("mechanisms: local=%0d remote=%0d forwarded=%0d io_wr=%0d io_rd=%0d X=%0d idle=%0d busy=%0d ovf=%0d badrounds=%0d",
             n_local, n_remote, n_forwarded, n_io_wr, n_io_rd, n_x, n_idle, n_busy_seen, n_ovf, n_badr);
    check(n_local > 0, "local results");
    check(n_remote > 0, "remote results");
    check(n_forwarded > 0, "forwarding");
    check(n_io_wr > 0 && n_io_rd > 0, "clock-crossing reads and writes");
    check(n_x > 0, "conditional X applied");
    check(n_idle > 0, "idle branch");
    check(n_busy_seen > 0, "busy status while decoding");
    check(n_ovf > 0, "measurement overflow flag");
    check(n_badr > 0, "bad round flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk_seq);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
