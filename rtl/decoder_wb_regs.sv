// decoder_wb_regs: WISHBONE register file and control of the decoder.
//
// The sequencer program drives the decoder entirely through a 32-bit
// WISHBONE slave. At the start of an experiment it writes the experiment
// features (the number of measurement rounds) and the decoding
// configuration (which stabilizers form the logical observable). Each shot
// it writes the packed measurement outcomes as consecutive 32-bit words to
// one data address, writes the start command, polls the status register
// until the done bit is set, and reads the result: whether the errors
// flipped the logical observable. The decoder also reports how many
// decoder clocks the decode took. These duties follow the paper; the
// register map, bit encodings and error flags are this design's choice.
//
// Register map (word addresses, see qec_dec_pkg):
//   0 CTRL      W  bit0 start decoding, bit1 clear measurements and flags
//   1 ROUNDS    RW number of measurement rounds, 2 .. MAX_ROUNDS+1
//   2 OBS_MASK  RW NUM_ANC-bit mask of stabilizers forming the observable
//   3 MEAS_DATA W  next 32 measurement bits (round-major, LSB = round 0
//                  ancilla 0); more than MEAS_WORDS words sets OVERFLOW
//   4 STATUS    R  bit0 busy, bit1 done, bit2 result, bit3 overflow,
//                  bit4 bad round count
//   5 RESULT    R  bit0 logical observable flipped
//   6 CYCLES    R  decoder clocks from the start write to done
//   7 DEFECTS   R  detectors that fired in the last syndrome
//
// How a decode runs: start (when not busy and ROUNDS is legal) sets busy,
// clears done and the cycle counter, and asks syndrome_builder for the
// detectors (1 clock). They go to the decoding engine with a one-clock
// eng_start; when the engine answers eng_done the result is registered,
// and done rises one clock later (so a reader in another clock domain that
// sees done also sees the final result bit). The stored measurements and
// the write pointer are cleared as soon as the detectors are built, so the
// next shot's words can be written while the engine runs. A start with an
// illegal ROUNDS sets the bad-round flag instead.
//
// WISHBONE: classic single cycles; ack is registered and comes in the
// clock after stb; read data is valid with ack. Every register is written
// whole, so the optional SEL byte-lane signal is not part of the port.
module decoder_wb_regs
  import qec_dec_pkg::*;
#(
  parameter int unsigned MAX_ROUNDS = 25,
  localparam int unsigned MEAS_BITS  = NUM_ANC * (MAX_ROUNDS + 1),
  localparam int unsigned MEAS_WORDS = (MEAS_BITS + WB_DW - 1) / WB_DW,
  localparam int unsigned DET_BITS   = NUM_ANC * MAX_ROUNDS,
  localparam int unsigned RW         = $clog2(MAX_ROUNDS + 2),
  localparam int unsigned CW         = $clog2(DET_BITS + 1),
  localparam int unsigned MI         = (MEAS_WORDS > 1) ? $clog2(MEAS_WORDS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // WISHBONE slave
  input  logic               wb_cyc,
  input  logic               wb_stb,
  input  logic               wb_we,
  input  logic [WB_AW-1:0]   wb_adr,
  input  logic [WB_DW-1:0]   wb_dat_w,
  output logic               wb_ack,
  output logic [WB_DW-1:0]   wb_dat_r,
  // decoding engine
  output logic               eng_start,
  output logic [DET_BITS-1:0] eng_det,
  output logic [RW-1:0]      eng_num_layers,
  output logic [NUM_ANC-1:0] eng_obs_mask,
  input  logic               eng_done,
  input  logic               eng_result,
  // status bitfield as a decoder port
  output logic [STATUS_W-1:0] status
);

  typedef enum logic [1:0] {S_IDLE, S_BUILD, S_RUN, S_FINISH} state_e;
  state_e state;

  logic [WB_DW-1:0]            meas_mem [MEAS_WORDS];
  logic [$clog2(MEAS_WORDS+1)-1:0] wr_ptr;
  logic [RW-1:0]               rounds_q;
  logic [NUM_ANC-1:0]          obs_q;
  logic                        busy_q, done_q, result_q, ovf_q, badr_q;
  logic [31:0]                 cycles_q;

  // flattened measurements for the syndrome builder
  logic [MEAS_BITS-1:0] meas_flat;
  always_comb
    for (int b = 0; b < MEAS_BITS; b++)
      meas_flat[b] = meas_mem[b / WB_DW][b % WB_DW];

  logic           sb_build, sb_valid;
  logic [CW-1:0]  sb_defects;

  syndrome_builder #(.NUM_ANC(NUM_ANC), .MAX_ROUNDS(MAX_ROUNDS)) u_sb (
    .clk, .rst_n,
    .build          (sb_build),
    .meas           (meas_flat),
    .num_meas_rounds(rounds_q),
    .det_valid      (sb_valid),
    .det            (eng_det),
    .num_layers     (eng_num_layers),
    .num_defects    (sb_defects)
  );

  assign eng_obs_mask = obs_q;

  logic access, wr, rd;
  assign access = wb_cyc && wb_stb && !wb_ack;
  assign wr     = access && wb_we;
  assign rd     = access && !wb_we;

  logic start_cmd, clear_cmd, rounds_ok;
  assign start_cmd = wr && (wb_adr == REG_CTRL) && wb_dat_w[0];
  assign clear_cmd = wr && (wb_adr == REG_CTRL) && wb_dat_w[1];
  assign rounds_ok = (rounds_q >= 2) && (int'(rounds_q) <= MAX_ROUNDS + 1);
  assign sb_build  = (state == S_IDLE) && start_cmd && rounds_ok;

  always_comb begin
    status = '0;
    status[ST_BUSY]      = busy_q;
    status[ST_DONE]      = done_q;
    status[ST_RESULT]    = result_q;
    status[ST_OVERFLOW]  = ovf_q;
    status[ST_BADROUNDS] = badr_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      wr_ptr    <= '0;
      rounds_q  <= '0;
      obs_q     <= '0;
      busy_q    <= 1'b0;
      done_q    <= 1'b0;
      result_q  <= 1'b0;
      ovf_q     <= 1'b0;
      badr_q    <= 1'b0;
      cycles_q  <= '0;
      eng_start <= 1'b0;
      wb_ack    <= 1'b0;
      wb_dat_r  <= '0;
      for (int w = 0; w < MEAS_WORDS; w++) meas_mem[w] <= '0;
    end else begin
      wb_ack    <= access;
      eng_start <= 1'b0;

      // register writes
      if (wr) begin
        unique case (wb_adr)
          REG_ROUNDS:   if (!busy_q) rounds_q <= wb_dat_w[RW-1:0];
          REG_OBS_MASK: if (!busy_q) obs_q    <= wb_dat_w[NUM_ANC-1:0];
          REG_MEAS_DATA: begin
            if (int'(wr_ptr) < MEAS_WORDS && state != S_BUILD) begin
              meas_mem[wr_ptr[MI-1:0]] <= wb_dat_w;
              wr_ptr <= wr_ptr + 1'b1;
            end else begin
              ovf_q <= 1'b1;
            end
          end
          default: ;
        endcase
      end
      if (clear_cmd) begin
        wr_ptr <= '0;
        ovf_q  <= 1'b0;
        badr_q <= 1'b0;
        for (int w = 0; w < MEAS_WORDS; w++) meas_mem[w] <= '0;
      end

      // register reads
      if (rd) begin
        unique case (wb_adr)
          REG_ROUNDS:   wb_dat_r <= WB_DW'(rounds_q);
          REG_OBS_MASK: wb_dat_r <= WB_DW'(obs_q);
          REG_STATUS:   wb_dat_r <= WB_DW'(status);
          REG_RESULT:   wb_dat_r <= WB_DW'(result_q);
          REG_CYCLES:   wb_dat_r <= cycles_q;
          REG_DEFECTS:  wb_dat_r <= WB_DW'(sb_defects);
          default:      wb_dat_r <= '0;
        endcase
      end

      if (busy_q) cycles_q <= cycles_q + 1'b1;

      // decode sequence
      unique case (state)
        S_IDLE: if (start_cmd) begin
          if (rounds_ok) begin
            state    <= S_BUILD;
            busy_q   <= 1'b1;
            done_q   <= 1'b0;
            cycles_q <= 32'd1;
          end else begin
            badr_q   <= 1'b1;
          end
        end
        S_BUILD: if (sb_valid) begin
          state     <= S_RUN;
          eng_start <= 1'b1;
          wr_ptr    <= '0;
          for (int w = 0; w < MEAS_WORDS; w++) meas_mem[w] <= '0;
        end
        S_RUN: if (eng_done && !eng_start) begin
          state    <= S_FINISH;
          result_q <= eng_result;
        end
        S_FINISH: begin
          state  <= S_IDLE;
          busy_q <= 1'b0;
          done_q <= 1'b1;
        end
      endcase
    end
  end

  // WISHBONE rule: ack only inside a cycle, never twice for one access.
  a_ack_in_cycle: assert property (@(posedge clk) disable iff (!rst_n)
                                   wb_ack |-> $past(wb_cyc && wb_stb));
  // the engine is started only while decoding
  a_start_busy:   assert property (@(posedge clk) disable iff (!rst_n)
                                   eng_start |-> busy_q);

endmodule
