// tb_seq_wb_bridge: self-checking test of the sequencer-to-WISHBONE bridge.
//
// The sequencer side runs at 250 MHz and issues random READ and WRITE
// I/O-port instructions, one at a time, with random gaps. On the 156.25 MHz
// side a WISHBONE slave model (256 words, acknowledging after 0-3 wait
// states) serves them. Checked: every instruction produces exactly one
// WISHBONE cycle with the right address, direction and data, held stable
// until ack; every instruction completes exactly once (io_rsp_valid); read
// data equals the testbench's own copy of the memory; and each transaction
// completes within 20 sequencer clocks (80 ns).
module tb_seq_wb_bridge;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  logic clk_seq = 1'b0, clk_dec = 1'b0, rst_seq_n = 1'b0, rst_dec_n = 1'b0;
  logic io_valid = 1'b0, io_we = 1'b0;
  logic [WB_AW-1:0] io_addr = '0;
  logic [WB_DW-1:0] io_wdata = '0;
  logic io_busy, io_rsp_valid;
  logic [WB_DW-1:0] io_rdata;
  logic wb_cyc, wb_stb, wb_we, wb_ack = 1'b0;
  logic [WB_AW-1:0] wb_adr;
  logic [WB_DW-1:0] wb_dat_w, wb_dat_r = '0;

  int checks = 0, failures = 0;
  int wb_cycles = 0;

  always #2   clk_seq = ~clk_seq;
  always #3.2 clk_dec = ~clk_dec;

  seq_wb_bridge dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // WISHBONE slave model
  logic [WB_DW-1:0] slave_mem [256];
  int wait_left = -1;
  logic [WB_AW-1:0] held_adr;
  logic [WB_DW-1:0] held_dat;
  logic held_we;
  always @(posedge clk_dec) begin
    wb_ack <= 1'b0;
    if (rst_dec_n && wb_cyc && wb_stb && !wb_ack) begin
      if (wait_left < 0) begin
        wait_left = $urandom % 4;
        held_adr = wb_adr; held_dat = wb_dat_w; held_we = wb_we;
      end else begin
        check(wb_adr == held_adr && wb_dat_w == held_dat && wb_we == held_we,
              "WISHBONE fields stable until ack");
      end
      if (wait_left == 0) begin
        wb_ack <= 1'b1;
        wb_cycles++;
        if (wb_we) slave_mem[wb_adr] = wb_dat_w;
        else       wb_dat_r <= slave_mem[wb_adr];
        wait_left = -1;
      end else begin
        wait_left--;
      end
    end
  end

  logic [WB_DW-1:0] ref_mem [256];

  initial begin
    for (int a = 0; a < 256; a++) begin
      slave_mem[a] = $urandom;
      ref_mem[a]   = slave_mem[a];
    end
    repeat (4) @(negedge clk_seq);
    rst_seq_n = 1'b1; rst_dec_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      int lat, rsp_seen;
      bit we;
      logic [WB_AW-1:0] a;
      logic [WB_DW-1:0] d;
      we = 1'($urandom % 2);
      a  = WB_AW'($urandom % 16);
      d  = $urandom;
      @(negedge clk_seq);
      check(!io_busy, "idle before issue");
      io_valid = 1'b1; io_we = we; io_addr = a; io_wdata = d;
      @(negedge clk_seq);
      io_valid = 1'b0; io_wdata = $urandom; io_addr = 8'($urandom);
      lat = 1; rsp_seen = 0;
      while (rsp_seen == 0 && lat < 40) begin
        check(io_busy || io_rsp_valid, "busy while in flight");
        if (io_rsp_valid) begin
          rsp_seen++;
          if (!we) check(io_rdata == ref_mem[a], "read data");
        end else begin
          @(negedge clk_seq);
          lat++;
        end
      end
      check(rsp_seen == 1, "one completion");
      check(lat <= 20, "completes within 20 sequencer clocks");
      if (we) ref_mem[a] = d;
      @(negedge clk_seq);
      check(!io_rsp_valid, "completion is one clock");
      repeat ($urandom % 3) @(negedge clk_seq);
    end
    check(wb_cycles == 400, "one WISHBONE cycle per instruction");
    for (int a = 0; a < 16; a++) check(slave_mem[a] == ref_mem[a], "memory contents");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk_seq);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
