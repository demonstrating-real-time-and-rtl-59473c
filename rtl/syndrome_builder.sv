// syndrome_builder: turns stability-8 ancilla measurements into detectors.
//
// In the stability-8 experiment four ancillas measure four Z x Z
// stabilizers every round, and the ancillas are not reset between rounds.
// A detector compares consecutive values of one stabilizer. Without reset
// an ancilla keeps its previous outcome and the new stabilizer value is
// added to it, m_r = m_(r-1) xor s_r, so s_r = m_r xor m_(r-1) and the
// detector between rounds r and r+1 is s_(r+1) xor s_r = m_(r+1) xor
// m_(r-1). A single misread outcome therefore lights detectors two layers
// apart, which is why the paper's decoding graph has edges between layers
// two rounds apart. R measurement rounds give R-1 detector layers (the
// paper's 8 rounds give 7 layers). The detector definition, the lack of
// reset and the layer count follow the paper; the formula is derived here
// from them, and the bit order is this design's choice.
//
// Interface: meas holds the outcome of ancilla i in measurement round r
// (0-based) at bit NUM_ANC*r+i; rounds 0 .. num_meas_rounds-1 are used,
// and m_(-1) is taken as 0 because the ancillas start in |0>. On build the
// detectors are computed and registered: det_valid pulses one clock later
// with det (layer k, stabilizer i at bit NUM_ANC*k+i; layers at and above
// num_layers are 0), num_layers and num_defects (the number of detectors
// that fired).
module syndrome_builder #(
  parameter int unsigned NUM_ANC    = 4,
  parameter int unsigned MAX_ROUNDS = 25,   // detector layers (decoding rounds)
  localparam int unsigned MEAS_BITS = NUM_ANC * (MAX_ROUNDS + 1),
  localparam int unsigned DET_BITS  = NUM_ANC * MAX_ROUNDS,
  localparam int unsigned RW        = $clog2(MAX_ROUNDS + 2),
  localparam int unsigned CW        = $clog2(DET_BITS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 build,
  input  logic [MEAS_BITS-1:0] meas,
  input  logic [RW-1:0]        num_meas_rounds,
  output logic                 det_valid,
  output logic [DET_BITS-1:0]  det,
  output logic [RW-1:0]        num_layers,
  output logic [CW-1:0]        num_defects
);

  logic [DET_BITS-1:0] det_c;
  logic [RW-1:0]       layers_c;
  logic [CW-1:0]       count_c;

  always_comb begin
    layers_c = (num_meas_rounds > 1) ? num_meas_rounds - 1'b1 : '0;
    if (int'(layers_c) > MAX_ROUNDS) layers_c = RW'(MAX_ROUNDS);
    det_c   = '0;
    count_c = '0;
    for (int k = 0; k < MAX_ROUNDS; k++) begin
      for (int i = 0; i < NUM_ANC; i++) begin
        logic older;
        older = (k > 0) ? meas[NUM_ANC*(k-1)+i] : 1'b0;
        if (k < int'(layers_c))
          det_c[NUM_ANC*k+i] = meas[NUM_ANC*(k+1)+i] ^ older;
        count_c = count_c + CW'(det_c[NUM_ANC*k+i]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      det_valid   <= 1'b0;
      det         <= '0;
      num_layers  <= '0;
      num_defects <= '0;
    end else begin
      det_valid <= build;
      if (build) begin
        det         <= det_c;
        num_layers  <= layers_c;
        num_defects <= count_c;
      end
    end
  end

endmodule
