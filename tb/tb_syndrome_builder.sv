// tb_syndrome_builder: self-checking test of the syndrome builder at its
// default size (4 stabilizers, up to 25 detector layers).
//
// For random run lengths (2 to 26 measurement rounds) the testbench plays
// the physics itself: each round it picks stabilizer values, accumulates
// them on unreset ancillas (m_r = m_(r-1) xor s_r) and optionally misreads
// some outcomes. Its reference syndrome is computed in two steps, as the
// definition reads: stabilizer values from consecutive reported outcomes,
// then detectors from consecutive stabilizer values. Checked: detectors,
// layer count, defect count, zero above the last layer, and a one-clock
// latency. Directed cases check that an error-free run with stable
// stabilizers gives no defect, and that one misread outcome lights the same
// stabilizer's detectors exactly two layers apart.
module tb_syndrome_builder;
  timeunit 1ns; timeprecision 1ps;

  localparam int A = 4, MR = 25;
  localparam int MB = A * (MR + 1), DB = A * MR;

  logic clk = 1'b0, rst_n = 1'b0, build = 1'b0;
  logic [MB-1:0] meas = '0;
  logic [4:0] num_meas_rounds = '0;
  logic det_valid;
  logic [DB-1:0] det;
  logic [4:0] num_layers;
  logic [6:0] num_defects;

  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;

  syndrome_builder #(.NUM_ANC(A), .MAX_ROUNDS(MR)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // run one case: R rounds; stab_mode 0 random, 1 stable; flips per outcome
  task automatic run_case(input int R, input bit stable, input int flip_round,
                          input int flip_anc, input bit random_flips,
                          output logic [DB-1:0] ref_det);
    bit s_true [MR+2][A];
    bit m_true [MR+2][A];
    bit m_rep  [MR+2][A];
    bit s_rep  [MR+2][A];
    int ndef;
    for (int i = 0; i < A; i++) begin
      m_true[0][i] = 0;
      m_rep[0][i]  = 0;
    end
    for (int r = 1; r <= R; r++)
      for (int i = 0; i < A; i++) begin
        s_true[r][i] = (r == 1 || !stable) ? bit'($urandom % 2) : s_true[r-1][i];
        m_true[r][i] = m_true[r-1][i] ^ s_true[r][i];
        m_rep[r][i]  = m_true[r][i] ^ ((r == flip_round && i == flip_anc) ||
                                       (random_flips && ($urandom % 8) == 0));
      end
    // reference: stabilizers from outcomes, then detectors from stabilizers
    for (int r = 1; r <= R; r++)
      for (int i = 0; i < A; i++) s_rep[r][i] = m_rep[r][i] ^ m_rep[r-1][i];
    ref_det = '0;
    ndef = 0;
    for (int k = 0; k < R - 1; k++)
      for (int i = 0; i < A; i++) begin
        ref_det[A*k+i] = s_rep[k+2][i] ^ s_rep[k+1][i];
        ndef += ref_det[A*k+i];
      end
    // drive
    @(negedge clk);
    meas = '0;
    for (int r = 1; r <= R; r++)
      for (int i = 0; i < A; i++) meas[A*(r-1)+i] = m_rep[r][i];
    // garbage above the used rounds must not matter
    for (int b = A * R; b < MB; b++) meas[b] = 1'($urandom % 2);
    num_meas_rounds = 5'(R);
    build = 1'b1;
    @(negedge clk);
    build = 1'b0;
    check(det_valid, "det_valid one clock after build");
    check(det == ref_det, "detectors");
    check(int'(num_layers) == R - 1, "layer count");
    check(int'(num_defects) == ndef, "defect count");
    @(negedge clk);
    check(!det_valid, "det_valid is a pulse");
  endtask

  initial begin
    logic [DB-1:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // directed: stable stabilizers, no errors -> no defects
    for (int R = 2; R <= MR + 1; R++) begin
      run_case(R, 1'b1, -1, 0, 1'b0, d);
      check(d == '0, "no defects without errors");
    end
    // directed: one misread outcome in round j of ancilla 2
    for (int j = 1; j <= 12; j++) begin
      run_case(12, 1'b1, j, 2, 1'b0, d);
      for (int k = 0; k < 11; k++)
        for (int i = 0; i < A; i++)
          check(d[A*k+i] == (i == 2 && (k == j - 2 || k == j)),
                "misread outcome lights detectors two layers apart");
    end
    // random
    for (int n = 0; n < 500; n++)
      run_case(2 + $urandom % MR, 1'b0, -1, 0, 1'b1, d);
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
