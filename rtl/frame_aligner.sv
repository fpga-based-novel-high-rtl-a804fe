// frame_aligner: frame aligner and pattern search (receiver, 120 MHz).
//
// The deserialiser delivers 40-bit words whose boundaries bear no relation
// to the frames. A right shifter keeps the last two words (80 bits) and cuts
// a 40-bit window out of them, delayed by `slip` bits (0..39); each bit slip
// moves the window one bit later in the stream. A pattern-search state
// machine looks at the window's top four bits:
//   SEARCH  - if they are not a header (1010 standard, 0101 without FEC), it
//             issues a bit slip and tries the next word at the new offset.
//             Since 40 and 3 (words per frame) have no common factor, every
//             offset meets every word phase within 120 words.
//   VERIFY  - a header was seen; it must reappear every third word
//             LOCK_CHECKS (32) more times. A miss sends it back to SEARCH
//             with another bit slip.
//   LOCKED  - header_lock is set and stays set until reset (the search ends).
//             Every word is written to the DEMUX RAM: wr_en high, wr_addr
//             counting 0..ADDR_WORDS-1 from the header word, so frames sit on
//             addresses 3f, 3f+1, 3f+2.
// Outputs for observation: shift_word (the registered window), pattern (its
// top four bits) and bs_count (the slip counter).
//
// Timing: the window is formed from registered input words; the first
// written word is the header word that completed the 33rd match.
// Synchronous active-high reset.
// The shifter/search split, the two headers, the bit-slip loop, the 32
// confirming headers, the write address generation and lock output follow
// the paper. The window arithmetic, the per-word slip, the every-third-word
// check and the permanent lock are this design's reading of it.
module frame_aligner
  import daq_pkg::*;
#(
  parameter int unsigned LOCK_CHECKS = 32,
  parameter int unsigned ADDR_WORDS  = 24,
  localparam int unsigned ADDR_W = $clog2(ADDR_WORDS),
  localparam int unsigned SLIP_W = $clog2(WORD_W)
) (
  input  logic              clk,
  input  logic              rst,
  input  word_t             rx_word,
  output word_t             shift_word,
  output logic [3:0]        pattern,
  output logic [SLIP_W-1:0] bs_count,
  output logic              header_lock,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output word_t             wr_data
);

  typedef enum logic [1:0] {SEARCH, VERIFY, LOCKED} state_e;

  state_e            state;
  word_t             cur_q, prev_q;
  logic [SLIP_W-1:0] slip;
  logic [1:0]        phase;
  logic [$clog2(LOCK_CHECKS+1)-1:0] checks;

  // Right shifter: window delayed by `slip` bits into the 80-bit history.
  word_t window;
  logic  hdr_ok;
  always_comb begin
    window = WORD_W'(({prev_q, cur_q} << slip) >> WORD_W);
    hdr_ok = (window[WORD_W-1 -: 4] == HDR_STD) || (window[WORD_W-1 -: 4] == HDR_NOFEC);
  end

  function automatic logic [SLIP_W-1:0] next_slip(input logic [SLIP_W-1:0] s);
    return (s == SLIP_W'(WORD_W - 1)) ? '0 : s + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= SEARCH;
      cur_q      <= '0;
      prev_q     <= '0;
      slip       <= '0;
      phase      <= '0;
      checks     <= '0;
      shift_word <= '0;
      pattern    <= '0;
      wr_en      <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
    end else begin
      cur_q      <= rx_word;
      prev_q     <= cur_q;
      shift_word <= window;
      pattern    <= window[WORD_W-1 -: 4];
      phase      <= (phase == 2'(WORDS_PER_FRAME - 1)) ? 2'd0 : phase + 2'd1;
      unique case (state)
        SEARCH: begin
          wr_en <= 1'b0;
          if (hdr_ok) begin
            state  <= VERIFY;
            phase  <= 2'd1;
            checks <= '0;
          end else begin
            slip <= next_slip(slip);
          end
        end
        VERIFY: begin
          wr_en <= 1'b0;
          if (phase == 2'd0) begin
            if (!hdr_ok) begin
              state <= SEARCH;
              slip  <= next_slip(slip);
            end else if (checks == $bits(checks)'(LOCK_CHECKS - 1)) begin
              state   <= LOCKED;
              wr_en   <= 1'b1;
              wr_addr <= '0;
              wr_data <= window;
            end else begin
              checks <= checks + 1'b1;
            end
          end
        end
        LOCKED: begin
          wr_en   <= 1'b1;
          wr_data <= window;
          wr_addr <= (wr_addr == ADDR_W'(ADDR_WORDS - 1)) ? '0 : wr_addr + 1'b1;
        end
        default: state <= SEARCH;
      endcase
    end
  end

  assign bs_count    = slip;
  assign header_lock = (state == LOCKED);

endmodule
