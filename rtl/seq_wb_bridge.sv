// seq_wb_bridge: sequencer I/O port to WISHBONE master, across clocks.
//
// A sequencer program reaches the decoder through I/O-port instructions: a
// WRITE instruction becomes a WISHBONE write cycle and a READ instruction a
// WISHBONE read cycle whose data returns to the program. The sequencer runs
// at 250 MHz (clk_seq) and the decoder at 156.25 MHz (clk_dec), so the
// bridge crosses clock domains. That much is from the paper; the crossing
// scheme and the I/O-port handshake are this design's choice.
//
// How it works: io_valid while !io_busy captures the instruction into
// holding registers and flips a request toggle. The toggle is synchronized
// into clk_dec by two flops; its edge opens a WISHBONE classic cycle
// (cyc = stb = 1) that drives the held fields, which stay stable until the
// transaction completes. Every transfer is a whole 32-bit word, so the
// optional SEL byte-lane signal is left out. On wb_ack the read data is stored
// and an acknowledge toggle flips; after two-flop synchronization into
// clk_seq it produces a one-clock io_rsp_valid with io_rdata (valid for
// reads, zero for writes) and releases io_busy. One transaction is in
// flight at a time.
//
// Timing: with a slave that acknowledges in the clock after stb, one
// transaction takes about 3 decoder clocks plus 3 sequencer clocks, about
// 35 ns.
module seq_wb_bridge
  import qec_dec_pkg::*;
#(
  parameter int unsigned AW = WB_AW,
  parameter int unsigned DW = WB_DW
) (
  // sequencer side
  input  logic          clk_seq,
  input  logic          rst_seq_n,
  input  logic          io_valid,
  input  logic          io_we,
  input  logic [AW-1:0] io_addr,
  input  logic [DW-1:0] io_wdata,
  output logic          io_busy,
  output logic          io_rsp_valid,
  output logic [DW-1:0] io_rdata,
  // decoder side: WISHBONE master
  input  logic            clk_dec,
  input  logic            rst_dec_n,
  output logic            wb_cyc,
  output logic            wb_stb,
  output logic            wb_we,
  output logic [AW-1:0]   wb_adr,
  output logic [DW-1:0]   wb_dat_w,
  input  logic            wb_ack,
  input  logic [DW-1:0]   wb_dat_r
);

  // toggles and response data shared by the two domains
  logic          ack_tgl;
  logic [DW-1:0] rsp_data;

  // ---------------- sequencer domain ----------------
  logic          req_tgl;
  logic          h_we;
  logic [AW-1:0] h_addr;
  logic [DW-1:0] h_wdata;
  logic [2:0]    ack_sync;       // two sync flops plus edge-detect flop

  always_ff @(posedge clk_seq or negedge rst_seq_n) begin
    if (!rst_seq_n) begin
      req_tgl      <= 1'b0;
      h_we         <= 1'b0;
      h_addr       <= '0;
      h_wdata      <= '0;
      io_busy      <= 1'b0;
      io_rsp_valid <= 1'b0;
      io_rdata     <= '0;
      ack_sync     <= '0;
    end else begin
      ack_sync     <= {ack_sync[1:0], ack_tgl};
      io_rsp_valid <= 1'b0;
      if (io_valid && !io_busy) begin
        h_we    <= io_we;
        h_addr  <= io_addr;
        h_wdata <= io_wdata;
        req_tgl <= ~req_tgl;
        io_busy <= 1'b1;
      end else if (io_busy && (ack_sync[2] != ack_sync[1])) begin
        io_busy      <= 1'b0;
        io_rsp_valid <= 1'b1;
        io_rdata     <= rsp_data;   // stable since before ack_tgl flipped
      end
    end
  end

  // ---------------- decoder domain ----------------
  logic [2:0]    req_sync;

  assign wb_we    = h_we;       // held stable for the whole transaction
  assign wb_adr   = h_addr;
  assign wb_dat_w = h_wdata;
  assign wb_stb   = wb_cyc;

  always_ff @(posedge clk_dec or negedge rst_dec_n) begin
    if (!rst_dec_n) begin
      req_sync <= '0;
      wb_cyc   <= 1'b0;
      ack_tgl  <= 1'b0;
      rsp_data <= '0;
    end else begin
      req_sync <= {req_sync[1:0], req_tgl};
      if (!wb_cyc && (req_sync[2] != req_sync[1])) begin
        wb_cyc <= 1'b1;
      end else if (wb_cyc && wb_ack) begin
        wb_cyc   <= 1'b0;
        rsp_data <= wb_we ? '0 : wb_dat_r;
        ack_tgl  <= ~ack_tgl;
      end
    end
  end

  // WISHBONE rule: once stb is raised it stays until ack.
  a_stb_held: assert property (@(posedge clk_dec) disable iff (!rst_dec_n)
                               (wb_stb && !wb_ack) |=> wb_stb);
  // The sequencer must not issue while busy; the bridge ignores it, but a
  // program doing so loses the instruction.
  a_no_issue_busy: assert property (@(posedge clk_seq) disable iff (!rst_seq_n)
                                    !(io_valid && io_busy));

endmodule
