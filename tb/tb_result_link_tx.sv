// tb_result_link_tx: self-checking test of the result-link serializer.
//
// Random messages are offered with random gaps and also back to back. For
// every accepted message the testbench builds the expected frame itself
// (start bit 1, then the 8 message bits LSB first) and checks the line bit
// by bit: the start bit must appear in the clock right after acceptance and
// the line must be 0 whenever no frame is due. A saturated run checks the
// rate: one message every 9 clocks. Inputs are driven and outputs sampled
// on the falling edge.
module tb_result_link_tx;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic msg_valid = 1'b0, msg_ready, ser_out;
  result_msg_t msg = '0;
  int checks = 0, failures = 0;
  bit exp_q[$];

  always #2 clk = ~clk;   // 250 MHz

  result_link_tx dut (.clk, .rst_n, .msg_valid, .msg, .msg_ready, .ser_out);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // one falling-edge step: check the line, then drive
  task automatic step(input bit v, input result_msg_t m);
    @(negedge clk);
    begin
      bit exp_bit;
      exp_bit = (exp_q.size() > 0) ? exp_q.pop_front() : 1'b0;
      check(ser_out == exp_bit, "serial bit");
    end
    msg_valid = v;
    msg       = m;
    #0;
    if (v && msg_ready) begin
      exp_q.push_back(1'b1);
      for (int b = 0; b < MSG_W; b++) exp_q.push_back(m[b]);
    end
  endtask

  initial begin
    int accepted;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random traffic
    for (int n = 0; n < 400; n++)
      step(($urandom % 3) == 0, result_msg_t'($urandom));
    // saturated traffic: rate check
    accepted = 0;
    for (int n = 0; n < 90; n++) begin
      step(1'b1, result_msg_t'($urandom));
      if (msg_ready) accepted++;
    end
    check(accepted == 10, "one message per 9 clocks");
    for (int n = 0; n < 12; n++) step(1'b0, '0);
    check(exp_q.size() == 0, "all frames sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
