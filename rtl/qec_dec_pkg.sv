// qec_dec_pkg: types and constants shared by the real-time decoding path.
//
// The control system distributes classified readout results as short
// messages (qubit index plus the hard 0/1 result) and talks to the decoder
// through a 32-bit WISHBONE bus. The register map below is this design's
// own choice: the paper names the registers' purposes (number of rounds,
// logical observable definition, measurement data, start, status, result,
// decoder speed) but not their addresses or encodings.
package qec_dec_pkg;

  // Ankaa-2 has 84 qubits, so a qubit index needs 7 bits.
  localparam int unsigned NUM_QUBITS = 84;
  localparam int unsigned QW         = 7;

  // Stability-8: four Z x Z stabilizers, each measured by one ancilla.
  localparam int unsigned NUM_ANC    = 4;

  // WISHBONE bus of the decoder: 32-bit data, 8-bit word address.
  localparam int unsigned WB_DW      = 32;
  localparam int unsigned WB_AW      = 8;

  // One classified-result message.
  typedef struct packed {
    logic [QW-1:0] qubit;
    logic          value;
  } result_msg_t;

  localparam int unsigned MSG_W = $bits(result_msg_t);

  // Decoder register map (word addresses).
  typedef enum logic [WB_AW-1:0] {
    REG_CTRL      = 8'h00,  // W: bit0 start decoding, bit1 clear measurements
    REG_ROUNDS    = 8'h01,  // RW: number of measurement rounds
    REG_OBS_MASK  = 8'h02,  // RW: stabilizers whose product is the observable
    REG_MEAS_DATA = 8'h03,  // W: next 32 measurement bits (auto-increment)
    REG_STATUS    = 8'h04,  // R: status bitfield
    REG_RESULT    = 8'h05,  // R: bit0 logical observable flipped
    REG_CYCLES    = 8'h06,  // R: decoder clocks from start to result
    REG_DEFECTS   = 8'h07   // R: defects in the last syndrome
  } dec_reg_e;

  // Status bitfield, also exported as a decoder port.
  localparam int unsigned ST_BUSY      = 0;
  localparam int unsigned ST_DONE      = 1;
  localparam int unsigned ST_RESULT    = 2;
  localparam int unsigned ST_OVERFLOW  = 3;
  localparam int unsigned ST_BADROUNDS = 4;
  localparam int unsigned STATUS_W     = 5;

endpackage
