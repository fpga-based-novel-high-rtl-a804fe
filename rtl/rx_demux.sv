// rx_demux: 40-to-120-bit DEMUX with clock-domain crossing (receiver side).
//
// A dual-port RAM of FRAMES entries of 120 bits. Port A, in the 120 MHz
// transceiver clock, writes the aligned 40-bit words at the word address the
// frame aligner generates (address = 3 x frame + word, word 0 being the one
// with the header, so 3 x FRAMES addresses). Port B, in the 40 MHz fabric
// clock, reads one whole 120-bit frame per cycle.
//
// Control logic: writing word 2 of a frame completes it and advances the
// write frame pointer, which reaches the read side in Gray code through a
// two-flip-flop synchroniser. The read side emits a frame (out_valid) in
// every fabric cycle in which a completed frame is waiting. A frame completed
// while the RAM is full pulses overflow (cannot happen at matched rates).
//
// Interface: wclk domain: wr_en, wr_addr, wr_data, overflow. rclk domain:
// out_valid, out_frame, registered. Separate synchronous active-high resets.
// RAM + control logic, the write address from the frame aligner and the
// widths/clocks follow the paper; depth and pointer scheme are this design's.
module rx_demux
  import daq_pkg::*;
#(
  parameter int unsigned FRAMES = 8,
  localparam int unsigned ADDR_W = $clog2(WORDS_PER_FRAME * FRAMES)
) (
  input  logic              wclk,
  input  logic              wrst,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  word_t             wr_data,
  output logic              overflow,

  input  logic              rclk,
  input  logic              rrst,
  output logic              out_valid,
  output frame_t            out_frame
);

  localparam int unsigned AW = $clog2(FRAMES);
  localparam int unsigned PW = AW + 1;

  function automatic logic [PW-1:0] to_gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [PW-1:0] from_gray(input logic [PW-1:0] g);
    logic [PW-1:0] b;
    b[PW-1] = g[PW-1];
    for (int i = int'(PW) - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  frame_t mem [FRAMES];

  // ---------------- write side (port A) ----------------
  logic [AW-1:0] wframe;
  logic [1:0]    wword;
  logic [PW-1:0] wptr, wptr_gray, rptr_gray_w, rptr_w;

  assign wframe = AW'(wr_addr / ADDR_W'(WORDS_PER_FRAME));
  assign wword  = 2'(wr_addr % ADDR_W'(WORDS_PER_FRAME));
  assign rptr_w = from_gray(rptr_gray_w);

  always_ff @(posedge wclk)
    if (wr_en) mem[wframe][FRAME_W-1-WORD_W*wword -: WORD_W] <= wr_data;

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wptr      <= '0;
      wptr_gray <= '0;
      overflow  <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (wr_en && wword == 2'(WORDS_PER_FRAME - 1)) begin
        wptr      <= wptr + 1'b1;
        wptr_gray <= to_gray(wptr + 1'b1);
        if ((wptr - rptr_w) == PW'(FRAMES)) overflow <= 1'b1;
      end
    end
  end

  // ---------------- read side (port B) ----------------
  logic [PW-1:0] rptr, rptr_gray, wptr_gray_r;

  sync2 #(.W(PW)) u_sync_w2r (.clk(rclk), .rst(rrst), .d(wptr_gray), .q(wptr_gray_r));
  sync2 #(.W(PW)) u_sync_r2w (.clk(wclk), .rst(wrst), .d(rptr_gray), .q(rptr_gray_w));

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rptr      <= '0;
      rptr_gray <= '0;
      out_valid <= 1'b0;
      out_frame <= '0;
    end else begin
      out_valid <= 1'b0;
      if (wptr_gray_r != rptr_gray) begin
        out_valid <= 1'b1;
        out_frame <= mem[rptr[AW-1:0]];
        rptr      <= rptr + 1'b1;
        rptr_gray <= to_gray(rptr + 1'b1);
      end
    end
  end

endmodule
