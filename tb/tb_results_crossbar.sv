// tb_results_crossbar: self-checking test of the low-latency results
// crossbar at its default size (6 readout inputs, 2 inter-chassis links).
//
// Phase 1, latency: single messages from each input in turn must be
//   broadcast exactly 2 clocks after they are offered (the paper budgets
//   40 ns = 10 clocks for this step).
// Phase 2, traffic: every input sends random messages no faster than a
//   serial link can deliver (one per 9 clocks) while the inter-chassis links
//   accept with random back-pressure. Every message must be broadcast
//   exactly once; every message of local origin, and none from another
//   chassis, must leave on each inter-chassis link (single hop). Nothing
//   may be dropped.
// Phase 3, FIFO overflow: with the inter-chassis links stalled, 18 local
//   messages fill the 16-entry FIFOs and 2 per link are dropped and counted.
// Phase 4, holding overflow: all 8 inputs offer a message every clock for
//   5 clocks; only one can be granted per clock, so 4*7 = 28 are dropped.
// A fair round robin must broadcast the 8 messages of the first such clock
// in 8 consecutive clocks, one from each input.
module tb_results_crossbar;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  localparam int NS = 6, NR = 2, N = NS + NR, FD = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic        [NS-1:0] src_valid = '0;
  result_msg_t [NS-1:0] src_msg = '0;
  logic        [NR-1:0] rem_valid = '0;
  result_msg_t [NR-1:0] rem_msg = '0;
  logic bcast_valid, bcast_local;
  result_msg_t bcast_msg;
  logic        [NR-1:0] node_out_valid;
  result_msg_t [NR-1:0] node_out_msg;
  logic        [NR-1:0] node_out_ready = '1;
  logic [15:0] overflow_count;

  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  results_crossbar #(.NUM_SRC(NS), .NUM_REMOTE(NR)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // monitors (sample at the falling edge)
  int bc_seen[int];          // message code -> times broadcast
  int bc_local_seen[int];
  int out_seen[NR][int];
  int bc_count = 0;
  bit monitor_on = 1'b0;
  always @(negedge clk) if (monitor_on) begin
    if (bcast_valid) begin
      bc_seen[int'(bcast_msg)]++;
      if (bcast_local) bc_local_seen[int'(bcast_msg)]++;
      bc_count++;
    end
    for (int j = 0; j < NR; j++)
      if (node_out_valid[j] && node_out_ready[j]) out_seen[j][int'(node_out_msg[j])]++;
  end

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0; src_valid = '0; rem_valid = '0; node_out_ready = '1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
  endtask

  // unique message codes: 8 bits, the input index is kept in the low bits
  function automatic result_msg_t code(input int input_idx, input int serial);
    return result_msg_t'(((serial % 32) << 3) | input_idx);
  endfunction

  initial begin
    int sent_local[int], sent_remote[int];
    int next_ok[N];
    do_reset();

    // ---- phase 1: latency ----
    for (int i = 0; i < N; i++) begin
      result_msg_t m;
      m = code(i, 7);
      @(negedge clk);
      if (i < NS) begin src_valid[i] = 1'b1; src_msg[i] = m; end
      else        begin rem_valid[i-NS] = 1'b1; rem_msg[i-NS] = m; end
      @(negedge clk);
      src_valid = '0; rem_valid = '0;
      check(!bcast_valid, "no broadcast after 1 clock");
      @(negedge clk);
      check(bcast_valid && bcast_msg == m, "broadcast after 2 clocks");
      check(bcast_local == (i < NS), "origin flag");
      repeat (3) @(negedge clk);
    end

    // ---- phase 2: traffic ----
    do_reset();
    monitor_on = 1'b1;
    foreach (next_ok[i]) next_ok[i] = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      src_valid = '0; rem_valid = '0;
      for (int j = 0; j < NR; j++) node_out_ready[j] = ($urandom % 4) != 0;
      for (int i = 0; i < N; i++) begin
        if (t >= next_ok[i] && ($urandom % 3) == 0 && t < 1900) begin
          result_msg_t m;
          m = code(i, t / 9 + 3 * i);
          if (i < NS) begin
            if (sent_local.exists(int'(m))) continue;
            src_valid[i] = 1'b1; src_msg[i] = m; sent_local[int'(m)] = 1;
          end else begin
            if (sent_remote.exists(int'(m))) continue;
            rem_valid[i-NS] = 1'b1; rem_msg[i-NS] = m; sent_remote[int'(m)] = 1;
          end
          next_ok[i] = t + 9;
        end
      end
    end
    monitor_on = 1'b0;
    check(overflow_count == 0, "no drops at link rate");
    check(bc_seen.size() == sent_local.size() + sent_remote.size(), "broadcast count");
    foreach (sent_local[m]) begin
      check(bc_seen.exists(m) && bc_seen[m] == 1, "local message broadcast once");
      check(bc_local_seen.exists(m), "local flag");
      for (int j = 0; j < NR; j++)
        check(out_seen[j].exists(m) && out_seen[j][m] == 1, "local message sent to other chassis");
    end
    foreach (sent_remote[m]) begin
      check(bc_seen.exists(m) && bc_seen[m] == 1, "remote message broadcast once");
      for (int j = 0; j < NR; j++)
        check(!out_seen[j].exists(m), "remote message not forwarded (single hop)");
    end
    for (int j = 0; j < NR; j++)
      check(out_seen[j].size() == sent_local.size(), "link carries exactly the local messages");

    // ---- phase 3: FIFO overflow ----
    do_reset();
    node_out_ready = '0;
    for (int k = 0; k < FD + 2; k++) begin
      @(negedge clk);
      src_valid[0] = 1'b1; src_msg[0] = code(0, k % 32);
      @(negedge clk);
      src_valid = '0;
      repeat (8) @(negedge clk);
    end
    check(overflow_count == 16'(2 * NR), "FIFO overflow counted");
    check(&node_out_valid, "FIFOs hold messages");
    node_out_ready = '1;
    repeat (FD + 2) @(negedge clk);
    check(!(|node_out_valid), "FIFOs drained");

    // ---- phase 4: holding overflow and round robin ----
    do_reset();
    begin
      int order[$];
      bc_count = 0;
      for (int c = 0; c < 5; c++) begin
        @(negedge clk);
        if (c > 1 && bcast_valid) order.push_back(int'(bcast_msg) & 7);
        src_valid = '1; rem_valid = '1;
        for (int i = 0; i < NS; i++) src_msg[i] = code(i, c);
        for (int j = 0; j < NR; j++) rem_msg[j] = code(NS + j, c);
      end
      @(negedge clk);
      if (bcast_valid) order.push_back(int'(bcast_msg) & 7);
      src_valid = '0; rem_valid = '0;
      for (int c = 0; c < 12; c++) begin
        @(negedge clk);
        if (bcast_valid) order.push_back(int'(bcast_msg) & 7);
      end
      check(overflow_count == 16'(4 * (N - 1)), "holding-register overflow counted");
      // every input appears in any N consecutive grants
      for (int s = 0; s + N <= order.size(); s++) begin
        bit [N-1:0] seen;
        seen = '0;
        for (int k = 0; k < N; k++) seen[order[s+k]] = 1'b1;
        check(&seen, "round robin fair");
      end
      check(order.size() >= N, "grants observed");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
