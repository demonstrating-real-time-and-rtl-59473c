// cc_engine_model: behavioural stand-in for the decoding engine.
//
// Not synthesizable intent and not the decoder's algorithm: the paper's
// engine is a Collision Clustering decoder whose insides are published
// elsewhere. This model only has the engine's port behaviour so that the
// register file and the system can be exercised: after start it waits
// BASE + PER_DEFECT * (number of detectors that fired) clocks, the way a
// clustering decoder takes longer on noisier syndromes, then pulses done
// for one clock with result. The result rule is a simple stand-in that a
// testbench can predict: the parity of the first-layer detectors that
// belong to the observable mask (a defect there is matched to the lower
// time boundary).
module cc_engine_model #(
  parameter int unsigned DET_BITS   = 100,
  parameter int unsigned NUM_ANC    = 4,
  parameter int unsigned RW         = 5,
  parameter int unsigned BASE       = 4,
  parameter int unsigned PER_DEFECT = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [DET_BITS-1:0] det,
  input  logic [RW-1:0]       num_layers,
  input  logic [NUM_ANC-1:0]  obs_mask,
  output logic                done,
  output logic                result
);

  int unsigned left;
  logic        busy;
  logic        pend_result;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      left        <= 0;
      done        <= 1'b0;
      result      <= 1'b0;
      pend_result <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy        <= 1'b1;
        left        <= BASE + PER_DEFECT * $countones(det);
        pend_result <= (num_layers != 0) && ^(det[NUM_ANC-1:0] & obs_mask);
      end else if (busy) begin
        if (left <= 1) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          result <= pend_result;
        end
        left <= left - 1;
      end
    end
  end

endmodule
