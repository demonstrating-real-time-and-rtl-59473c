// tb_readout_to_seq: self-checking test of the gate card's result table.
//
// Random broadcast messages (including indices >= 84, which must be
// ignored) update a reference table kept by the testbench; after every
// clock all 84 qubits are read back and compared (value, fresh flag) along
// with the count of accepted messages. A message must be readable one
// clock after it is broadcast. clear is exercised alone and together with
// a message in the same clock.
module tb_readout_to_seq;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, clear = 1'b0;
  result_msg_t in_msg = '0;
  logic [QW-1:0] rd_qubit = '0;
  logic rd_value, rd_fresh;
  logic [15:0] rx_count;

  int checks = 0, failures = 0;
  bit ref_value[NUM_QUBITS];
  bit ref_fresh[NUM_QUBITS];
  int ref_count = 0;

  always #2 clk = ~clk;

  readout_to_seq #(.NUM_QUBITS(NUM_QUBITS)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare_all();
    for (int q = 0; q < 128; q++) begin
      rd_qubit = QW'(q);
      #0.01;
      if (q < NUM_QUBITS) begin
        check(rd_value == ref_value[q], "value");
        check(rd_fresh == ref_fresh[q], "fresh flag");
      end else begin
        check(!rd_fresh && !rd_value, "out-of-range read");
      end
    end
    check(int'(rx_count) == ref_count, "count");
  endtask

  initial begin
    foreach (ref_value[q]) begin ref_value[q] = 0; ref_fresh[q] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      compare_all();
      in_valid = ($urandom % 2) == 0;
      in_msg   = result_msg_t'($urandom);
      clear    = ($urandom % 97) == 0 || t == 300;
      if (t == 300) in_valid = 1'b1;   // clear and a message together
      // reference update for the coming edge
      if (clear) begin
        foreach (ref_fresh[q]) ref_fresh[q] = 0;
        ref_count = 0;
      end
      if (in_valid && int'(in_msg.qubit) < NUM_QUBITS) begin
        ref_value[in_msg.qubit] = in_msg.value;
        ref_fresh[in_msg.qubit] = 1;
        ref_count++;
      end
    end
    @(negedge clk);
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
