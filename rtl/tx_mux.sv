// tx_mux: 120-to-40-bit MUX with clock-domain crossing (sender side).
//
// A dual-port RAM of FRAMES entries of 120 bits sits between the 40 MHz
// fabric clock and the 120 MHz transceiver clock. Port A writes one whole
// encoded frame per fabric cycle; port B reads it back as three 40-bit words,
// most significant word first (the word holding the header goes out first),
// one per transceiver cycle. 40 MHz x 120 bit = 120 MHz x 40 bit = 4.8 Gb/s,
// so once running the RAM neither fills nor empties.
//
// Control logic: binary frame pointers on each side, passed to the other side
// in Gray code through two-flip-flop synchronisers. The read side starts
// after START_LEVEL frames are stored, which absorbs the synchroniser delay;
// from then on it reads without gaps. If the RAM is ever empty at a frame
// boundary it sends an all-zero idle word (out_valid low) and pulses
// underflow; a frame offered while full is dropped and overflow pulses.
//
// Interface: wclk domain: in_valid, in_frame, overflow. rclk domain:
// out_valid, out_word (registered, one word per clock once started),
// underflow. Each side has its own synchronous active-high reset.
// RAM + control logic, the 120/40-bit widths and the 40/120 MHz clocks follow
// the paper; depth, start level, Gray pointers and the status pulses are this
// design's choices.
module tx_mux
  import daq_pkg::*;
#(
  parameter int unsigned FRAMES      = 8,
  parameter int unsigned START_LEVEL = 2
) (
  input  logic   wclk,
  input  logic   wrst,
  input  logic   in_valid,
  input  frame_t in_frame,
  output logic   overflow,

  input  logic   rclk,
  input  logic   rrst,
  output logic   out_valid,
  output word_t  out_word,
  output logic   underflow
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

  // ---------------- write side (port A, fabric clock) ----------------
  logic [PW-1:0] wptr, wptr_gray, rptr_gray_w, rptr_w;
  logic          full;

  assign rptr_w = from_gray(rptr_gray_w);
  assign full   = (wptr - rptr_w) == PW'(FRAMES);

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wptr      <= '0;
      wptr_gray <= '0;
      overflow  <= 1'b0;
    end else begin
      overflow <= in_valid && full;
      if (in_valid && !full) begin
        wptr      <= wptr + 1'b1;
        wptr_gray <= to_gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk)
    if (in_valid && !full) mem[wptr[AW-1:0]] <= in_frame;

  // ---------------- read side (port B, transceiver clock) ----------------
  logic [PW-1:0] rptr, rptr_gray, wptr_gray_r, wptr_r, level;
  logic [1:0]    widx;
  logic          started;

  assign wptr_r = from_gray(wptr_gray_r);
  assign level  = wptr_r - rptr;

  sync2 #(.W(PW)) u_sync_w2r (.clk(rclk), .rst(rrst), .d(wptr_gray), .q(wptr_gray_r));
  sync2 #(.W(PW)) u_sync_r2w (.clk(wclk), .rst(wrst), .d(rptr_gray), .q(rptr_gray_w));

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rptr      <= '0;
      rptr_gray <= '0;
      widx      <= '0;
      started   <= 1'b0;
      out_valid <= 1'b0;
      out_word  <= '0;
      underflow <= 1'b0;
    end else begin
      underflow <= 1'b0;
      if (!started) begin
        out_valid <= 1'b0;
        out_word  <= '0;
        if (level >= PW'(START_LEVEL)) started <= 1'b1;
      end else if (widx == 2'd0 && level == '0) begin
        out_valid <= 1'b0;
        out_word  <= '0;
        underflow <= 1'b1;
      end else begin
        out_valid <= 1'b1;
        out_word  <= mem[rptr[AW-1:0]][FRAME_W-1-WORD_W*widx -: WORD_W];
        if (widx == 2'(WORDS_PER_FRAME - 1)) begin
          widx      <= '0;
          rptr      <= rptr + 1'b1;
          rptr_gray <= to_gray(rptr + 1'b1);
        end else begin
          widx <= widx + 2'd1;
        end
      end
    end
  end

endmodule
