// tb_result_link_rx: self-checking test of the result-link deserializer.
//
// The testbench serializes random messages itself (start bit 1, then the 8
// message bits LSB first), with random idle gaps and back-to-back frames.
// Each message must come out exactly once, with msg_valid high for one
// clock starting at the edge that samples the frame's last bit, and no
// message may appear while the line idles. Inputs are driven and outputs
// sampled on the falling edge.
module tb_result_link_rx;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ser_in = 1'b0, msg_valid;
  result_msg_t msg;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  result_link_rx dut (.clk, .rst_n, .ser_in, .msg_valid, .msg);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      result_msg_t m;
      int gap;
      m   = result_msg_t'($urandom);
      gap = (($urandom % 4) == 0) ? 0 : $urandom % 5;
      bit_out_frame(m, gap);
    end
    repeat (20) bit_out1(1'b0, 1'b0, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a frame: start bit, 8 data bits; msg_valid is expected after the last
  task automatic bit_out_frame(input result_msg_t m, input int gap);
    for (int g = 0; g < gap; g++) bit_out1(1'b0, 1'b0, '0);
    bit_out1(1'b1, 1'b0, '0);
    for (int b = 0; b < MSG_W; b++) bit_out1(m[b], b == MSG_W-1, m);
  endtask

  // drive a bit at a falling edge; the output after the following rising
  // edge is checked at the next falling edge, before the next bit is driven
  bit pend_exp = 1'b0;
  result_msg_t pend_msg = '0;
  task automatic bit_out1(input bit b, input bit expect_msg, input result_msg_t m);
    @(negedge clk);
    check(msg_valid == pend_exp, "msg_valid timing");
    if (pend_exp) check(msg == pend_msg, "message contents");
    ser_in   = b;
    pend_exp = expect_msg;
    pend_msg = m;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
