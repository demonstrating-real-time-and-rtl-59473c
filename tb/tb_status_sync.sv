// tb_status_sync: self-checking test of the status synchronizer.
//
// The source bits change on a 156.25 MHz clock and are read on a 250 MHz
// clock. Each source value is held for a random number of source clocks;
// the testbench checks that every output value is one the source really
// had (no invented values once the source has been stable), that a change
// appears no earlier than 2 and no later than 3 destination clocks after
// it, and that reset clears the output.
module tb_status_sync;
  timeunit 1ns; timeprecision 1ps;
  localparam int W = 5;

  logic clk_src = 1'b0, clk_dst = 1'b0, rst_dst_n = 1'b0;
  logic [W-1:0] d_src = '0;
  logic [W-1:0] q_dst;
  int checks = 0, failures = 0;

  always #3.2 clk_src = ~clk_src;
  always #2   clk_dst = ~clk_dst;

  status_sync #(.W(W)) dut (.clk_dst, .rst_dst_n, .d_src, .q_dst);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // history of source values with their change times
  realtime t_change = 0;
  logic [W-1:0] prev_src = '0;

  initial begin
    repeat (3) @(posedge clk_dst);
    check(q_dst == '0, "reset value");
    rst_dst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      int hold;
      @(posedge clk_src);
      prev_src = d_src;
      d_src    = W'($urandom);
      t_change = $realtime;
      hold = 2 + $urandom % 4;
      // after 1 destination edge the output must still be old; after 2
      // it may not yet show the value; after 3 it must
      @(posedge clk_dst); #0.1;
      check(q_dst == prev_src, "not earlier than 2 destination clocks");
      @(posedge clk_dst); #0.1;
      check(q_dst == d_src || q_dst == prev_src, "no invented value");
      @(posedge clk_dst); #0.1;
      check(q_dst == d_src, "value after 3 destination clocks");
      repeat (hold) @(posedge clk_src);
      check(q_dst == d_src, "stable value");
    end
    rst_dst_n = 1'b0;
    #1;
    check(q_dst == '0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_dst);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
