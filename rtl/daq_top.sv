// daq_top: sender and receiver of the error-correcting optical DAQ link.
//
// Sender (40 MHz fabric clock, then 120 MHz transceiver clock):
//   standard frame : 52 data bits -> scrambler (1 clk) -> eight BCH(15,7,2)
//                    encoders with header 1010 (1 clk) -> interleaver (0 clk)
//   frame w/o FEC  : header 0101 + 116 raw data bits, delayed 2 clks to keep
//                    frame order when the mode changes
//   -> tx_mux: 120-bit frame per 40 MHz clock -> three 40-bit words per
//      frame at 120 MHz on tx_word, for the transceiver's serialiser.
// Receiver:
//   rx_word (40 bits at 120 MHz from the deserialiser) -> frame_aligner
//   (bit slip, header search, lock, RAM write address) -> rx_demux (120-bit
//   frames at 40 MHz). The header picks the path: a header at most one bit
//   away from 1010 marks a standard frame, which goes deinterleaver (0 clk) -> BCH decoders (2 clk) -> descrambler (1 clk);
//   one at most one bit away from 0101 a frame without FEC, whose 116 raw
//   bits are delayed 3 clks; other frames are dropped (rx_bad_hdr). Result: rx_valid, rx_fec,
//   rx_data (52 bits in the low end for standard frames), rx_nerr, rx_fail,
//   also written as {rx_fec, rx_data} into pcie_fifo, read at 125 MHz.
// reset_ctrl holds everything in reset until RESET is low and the PLL is
// locked, with BUSY_O/DONE_O as start-up status; the reset is carried into
// the 120 and 125 MHz domains by synchronisers.
//
// The serialiser/deserialiser (transceiver), PLL, PCIe core and DMA are not
// part of this RTL: their signals are the ports below. The chain, widths,
// clocks and both frame formats follow the paper; the way the receiver
// chooses between the two formats and the status outputs are this design's.
module daq_top
  import daq_pkg::*;
(
  // clocks and start-up
  input  logic          clk40,         // fabric clock
  input  logic          clk120,        // transceiver user clock
  input  logic          clk125,        // PCIe user clock
  input  logic          reset,         // RESET
  input  logic          pll_locked,    // PLL_LOCKED
  output logic          busy_o,        // BUSY_O
  output logic          done_o,        // DONE_O

  // sender, fabric side
  input  logic          tx_valid,
  input  logic          tx_fec,        // 1: standard frame, 0: frame without FEC
  input  logic [115:0]  tx_data,       // standard frame uses bits 51:0
  output logic          tx_overflow,

  // sender, to the serialiser (120 MHz)
  output word_t         tx_word,
  output logic          tx_word_valid,
  output logic          tx_underflow,

  // receiver, from the deserialiser (120 MHz)
  input  word_t         rx_word,
  output logic          header_lock_o, // Header_LOCK_O
  output logic [5:0]    bs_count,      // bit slip counter
  output word_t         fa_shift_o,    // right shifter output
  output logic [3:0]    fa_pattern_o,  // bits under pattern search
  output logic          rx_overflow,

  // receiver, fabric side (40 MHz)
  output logic          rx_valid,
  output logic          rx_fec,
  output logic [115:0]  rx_data,
  output logic [4:0]    rx_nerr,       // bits corrected in this frame
  output logic          rx_fail,       // uncorrectable codeword in this frame
  output logic          rx_bad_hdr,    // frame dropped: header matches neither type

  // to the PCIe DMA (125 MHz)
  input  logic          pcie_rd_en,
  output logic [116:0]  pcie_rd_data,  // {fec, data}
  output logic          pcie_empty,
  output logic          pcie_full
);

  // ---------------- resets ----------------
  logic rst40, rst120, rst125;

  reset_ctrl u_reset (
    .clk(clk40), .reset(reset), .pll_locked(pll_locked),
    .rst_out(rst40), .busy(busy_o), .done(done_o)
  );
  // RESET forces the other domains' resets directly; their release follows
  // the fabric reset through the synchronisers.
  sync2 #(.W(1), .RST_VAL(1'b1)) u_rst120 (.clk(clk120), .rst(reset), .d(rst40), .q(rst120));
  sync2 #(.W(1), .RST_VAL(1'b1)) u_rst125 (.clk(clk125), .rst(reset), .d(rst40), .q(rst125));

  // ---------------- sender ----------------
  logic        scr_valid, enc_valid;
  logic [51:0] scr_data;
  frame_t      enc_frame, ilv_frame;

  scrambler u_scr (
    .clk(clk40), .rst(rst40),
    .in_valid(tx_valid && tx_fec), .in_data(tx_data[51:0]),
    .out_valid(scr_valid), .out_data(scr_data)
  );

  bch_encoder u_enc (
    .clk(clk40), .rst(rst40),
    .in_valid(scr_valid), .in_hdr(HDR_STD), .in_data(scr_data),
    .out_valid(enc_valid), .out_frame(enc_frame)
  );

  interleaver u_ilv (.in_frame(enc_frame), .out_frame(ilv_frame));

  // Frames without FEC: same two-clock latency as the standard path.
  logic [1:0]   raw_tx_v;
  logic [115:0] raw_tx_d [2];
  always_ff @(posedge clk40) begin
    if (rst40) begin
      raw_tx_v <= '0;
    end else begin
      raw_tx_v <= {raw_tx_v[0], tx_valid && !tx_fec};
    end
    raw_tx_d[0] <= tx_data;
    raw_tx_d[1] <= raw_tx_d[0];
  end

  logic   mux_in_valid;
  frame_t mux_in_frame;
  always_comb begin
    mux_in_valid = enc_valid || raw_tx_v[1];
    mux_in_frame = enc_valid ? ilv_frame : {HDR_NOFEC, raw_tx_d[1]};
  end

  tx_mux u_mux (
    .wclk(clk40), .wrst(rst40),
    .in_valid(mux_in_valid), .in_frame(mux_in_frame), .overflow(tx_overflow),
    .rclk(clk120), .rrst(rst120),
    .out_valid(tx_word_valid), .out_word(tx_word), .underflow(tx_underflow)
  );

  // ---------------- receiver ----------------
  localparam int unsigned RX_FRAMES = 8;
  localparam int unsigned RX_ADDR_W = $clog2(WORDS_PER_FRAME * RX_FRAMES);

  word_t                 fa_wr_data;
  logic                  fa_wr_en;
  logic [RX_ADDR_W-1:0]  fa_wr_addr;

  frame_aligner #(.ADDR_WORDS(WORDS_PER_FRAME * RX_FRAMES)) u_align (
    .clk(clk120), .rst(rst120), .rx_word(rx_word),
    .shift_word(fa_shift_o), .pattern(fa_pattern_o), .bs_count(bs_count),
    .header_lock(header_lock_o),
    .wr_en(fa_wr_en), .wr_addr(fa_wr_addr), .wr_data(fa_wr_data)
  );

  logic   dmx_valid;
  frame_t dmx_frame;

  rx_demux #(.FRAMES(RX_FRAMES)) u_demux (
    .wclk(clk120), .wrst(rst120),
    .wr_en(fa_wr_en), .wr_addr(fa_wr_addr), .wr_data(fa_wr_data), .overflow(rx_overflow),
    .rclk(clk40), .rrst(rst40),
    .out_valid(dmx_valid), .out_frame(dmx_frame)
  );

  // Frame kind from the received header: at most one bit away from 1010 is
  // a standard frame, at most one bit away from 0101 a frame without FEC.
  // Anything else (idle words after the sender stops, heavy damage) is
  // dropped and counted on rx_bad_hdr.
  frame_kind_e rx_kind;
  logic        hdr_good;
  always_comb begin
    int unsigned d_std, d_raw;
    d_std    = $countones(dmx_frame[FRAME_W-1 -: 4] ^ HDR_STD);
    d_raw    = $countones(dmx_frame[FRAME_W-1 -: 4] ^ HDR_NOFEC);
    rx_kind  = (d_std <= 1) ? FRAME_STD : FRAME_NOFEC;
    hdr_good = (d_std <= 1) || (d_raw <= 1);
  end
  assign rx_bad_hdr = dmx_valid && !hdr_good;

  frame_t      dil_frame;
  logic        dec_valid, dec_fail, dsc_valid;
  logic [3:0]  dec_hdr;
  logic [51:0] dec_data, dsc_data;
  logic [4:0]  dec_nerr;

  deinterleaver u_dil (.in_frame(dmx_frame), .out_frame(dil_frame));

  bch_decoder u_dec (
    .clk(clk40), .rst(rst40),
    .in_valid(dmx_valid && hdr_good && rx_kind == FRAME_STD), .in_frame(dil_frame),
    .out_valid(dec_valid), .out_hdr(dec_hdr), .out_data(dec_data),
    .out_nerr(dec_nerr), .out_fail(dec_fail)
  );

  descrambler u_dsc (
    .clk(clk40), .rst(rst40),
    .in_valid(dec_valid), .in_data(dec_data),
    .out_valid(dsc_valid), .out_data(dsc_data)
  );

  // Decoder status and frames without FEC delayed to line up with the
  // descrambler output.
  logic [4:0]   nerr_q;
  logic         fail_q;
  logic [2:0]   raw_rx_v;
  logic [115:0] raw_rx_d [3];
  always_ff @(posedge clk40) begin
    if (rst40) begin
      raw_rx_v <= '0;
      nerr_q   <= '0;
      fail_q   <= 1'b0;
    end else begin
      raw_rx_v <= {raw_rx_v[1:0], dmx_valid && hdr_good && rx_kind == FRAME_NOFEC};
      if (dec_valid) begin
        nerr_q <= dec_nerr;
        // a decoded header other than 1010 also means the frame is damaged
        fail_q <= dec_fail || (dec_hdr != HDR_STD);
      end
    end
    raw_rx_d[0] <= dmx_frame[RAW_W-1:0];
    raw_rx_d[1] <= raw_rx_d[0];
    raw_rx_d[2] <= raw_rx_d[1];
  end

  always_comb begin
    rx_valid = dsc_valid || raw_rx_v[2];
    rx_fec   = dsc_valid;
    rx_data  = dsc_valid ? {64'b0, dsc_data} : raw_rx_d[2];
    rx_nerr  = dsc_valid ? nerr_q : '0;
    rx_fail  = dsc_valid && fail_q;
  end

  pcie_fifo #(.WIDTH(RAW_W + 1), .DEPTH(16)) u_fifo (
    .wr_clk(clk40), .wr_rst(rst40),
    .wr_en(rx_valid), .wr_data({rx_fec, rx_data}), .full(pcie_full),
    .rd_clk(clk125), .rd_rst(rst125),
    .rd_en(pcie_rd_en), .rd_data(pcie_rd_data), .empty(pcie_empty)
  );

endmodule
