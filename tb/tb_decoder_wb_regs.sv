// tb_decoder_wb_regs: self-checking test of the decoder's WISHBONE
// register file and decode sequence, at the default size (up to 26
// measurement rounds, 4 measurement words), with the behavioural engine
// model standing in for the decoding engine.
//
// The testbench acts as the sequencer program: it writes the round count
// and observable mask, reads them back, writes the packed measurement
// words, starts the decode, polls STATUS until done, and reads RESULT,
// CYCLES and DEFECTS. It computes the detectors itself (consecutive
// stabilizer values of unreset ancillas) and checks them on the engine
// port when the engine is started, and it predicts the engine model's
// result and latency. CYCLES must equal the number of clocks from the
// start write to done as counted by the testbench. Error cases: a fifth
// measurement word sets OVERFLOW, illegal round counts (1 and 27) set the
// bad-round flag without starting, clear resets both, and a start while
// busy is ignored.
module tb_decoder_wb_regs;
  timeunit 1ns; timeprecision 1ps;
  import qec_dec_pkg::*;

  localparam int MR = 25, A = 4, DB = A * MR, MW = 4;
  localparam int BASE = 4, PERD = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wb_cyc = 0, wb_stb = 0, wb_we = 0, wb_ack;
  logic [WB_AW-1:0] wb_adr = '0;
  logic [WB_DW-1:0] wb_dat_w = '0, wb_dat_r;
  logic eng_start, eng_done, eng_result;
  logic [DB-1:0] eng_det;
  logic [4:0] eng_num_layers;
  logic [A-1:0] eng_obs_mask;
  logic [STATUS_W-1:0] status;

  int checks = 0, failures = 0;
  int clk_n = 0;

  always #3.2 clk = ~clk;
  always @(posedge clk) clk_n++;

  decoder_wb_regs #(.MAX_ROUNDS(MR)) dut (.*);

  cc_engine_model #(.DET_BITS(DB), .NUM_ANC(A), .RW(5), .BASE(BASE), .PER_DEFECT(PERD)) u_eng (
    .clk, .rst_n, .start(eng_start), .det(eng_det), .num_layers(eng_num_layers),
    .obs_mask(eng_obs_mask), .done(eng_done), .result(eng_result));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int ack_clk;
  task automatic wb_access(input bit we, input logic [7:0] adr, input logic [31:0] d,
                           output logic [31:0] q);
    @(negedge clk);
    wb_cyc = 1; wb_stb = 1; wb_we = we; wb_adr = adr; wb_dat_w = d;
    do @(negedge clk); while (!wb_ack);
    ack_clk = clk_n;
    q = wb_dat_r;
    wb_cyc = 0; wb_stb = 0;
  endtask
  task automatic wr(input logic [7:0] adr, input logic [31:0] d);
    logic [31:0] q;
    wb_access(1'b1, adr, d, q);
  endtask
  task automatic rd(input logic [7:0] adr, output logic [31:0] q);
    wb_access(1'b0, adr, '0, q);
  endtask

  // engine port monitor: detectors seen at eng_start
  logic [DB-1:0] seen_det;
  int starts = 0;
  always @(posedge clk) if (rst_n && eng_start) begin seen_det <= eng_det; starts++; end
  // done monitor
  int done_clk = 0;
  logic done_d = 0;
  always @(negedge clk) begin
    if (status[ST_DONE] && !done_d) done_clk = clk_n;
    done_d = status[ST_DONE];
  end

  initial begin
    logic [31:0] q;
    int decodes, flips;
    decodes = 0; flips = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- bad round counts ----
    for (int k = 0; k < 2; k++) begin
      int bad;
      bad = (k == 0) ? 1 : 27;
      wr(REG_ROUNDS, bad);
      wr(REG_CTRL, 1);
      rd(REG_STATUS, q);
      check(q[ST_BADROUNDS] && !q[ST_BUSY], "bad round count flagged, no decode");
      wr(REG_CTRL, 2);
      rd(REG_STATUS, q);
      check(!q[ST_BADROUNDS], "clear resets the flag");
    end
    check(starts == 0, "no engine start on bad rounds");

    // ---- overflow ----
    for (int w = 0; w < MW + 1; w++) wr(REG_MEAS_DATA, $urandom);
    rd(REG_STATUS, q);
    check(q[ST_OVERFLOW], "fifth word overflows");
    wr(REG_CTRL, 2);
    rd(REG_STATUS, q);
    check(!q[ST_OVERFLOW], "clear resets overflow");

    // ---- random decodes ----
    for (int n = 0; n < 150; n++) begin
      int R, nd, t_start, exp_lat;
      logic [3:0] mask;
      logic [MW*32-1:0] mbits;
      logic [DB-1:0] ref_det;
      bit s [MR+2][A];
      bit m [MR+2][A];
      bit exp_res;
      R    = 2 + $urandom % MR;
      mask = 4'($urandom);
      if (n < 3) R = (n == 0) ? 2 : MR + 1;
      // unreset ancillas with random stabilizer values and misreads
      for (int i = 0; i < A; i++) m[0][i] = 0;
      mbits = '0;
      for (int r = 1; r <= R; r++)
        for (int i = 0; i < A; i++) begin
          m[r][i] = m[r-1][i] ^ bit'($urandom % 2);
          mbits[A*(r-1)+i] = m[r][i];
        end
      for (int r = 1; r <= R; r++)
        for (int i = 0; i < A; i++) s[r][i] = m[r][i] ^ m[r-1][i];
      ref_det = '0; nd = 0;
      for (int k = 0; k < R - 1; k++)
        for (int i = 0; i < A; i++) begin
          ref_det[A*k+i] = s[k+2][i] ^ s[k+1][i];
          nd += ref_det[A*k+i];
        end
      exp_res = ^(ref_det[3:0] & mask);

      wr(REG_ROUNDS, R);
      wr(REG_OBS_MASK, 32'(mask));
      rd(REG_ROUNDS, q);   check(q == R, "ROUNDS readback");
      rd(REG_OBS_MASK, q); check(q == 32'(mask), "OBS_MASK readback");
      for (int w = 0; w < (A * R + 31) / 32; w++) wr(REG_MEAS_DATA, mbits[32*w +: 32]);
      wr(REG_CTRL, 1);
      t_start = ack_clk;
      // a second start while busy must be ignored
      wr(REG_CTRL, 1);
      do rd(REG_STATUS, q); while (!q[ST_DONE]);
      decodes++;
      check(seen_det == ref_det, "detectors on the engine port");
      check(q[ST_RESULT] == exp_res, "status result bit");
      rd(REG_RESULT, q);  check(q == 32'(exp_res), "RESULT");
      flips += exp_res;
      rd(REG_DEFECTS, q); check(q == nd, "DEFECTS");
      rd(REG_CYCLES, q);
      // CYCLES counts the clock edges from the one that accepts the start
      // write (the one raising its ack) to the one raising done, inclusive
      check(int'(q) == done_clk - t_start + 1, "CYCLES matches the testbench count");
      exp_lat = BASE + PERD * nd;
      check(int'(q) >= exp_lat && int'(q) <= exp_lat + 8, "decode time follows the engine");
    end
    check(starts == decodes, "one engine start per decode");
    check(flips > 0 && flips < decodes, "both results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
