// interleaver: block interleaver on each 60-bit half of the encoded frame.
//
// Each half (bits 119..60 and 59..0) holds four 15-bit codewords. They are
// written row by row into a 4 x 15 matrix (one codeword per row, codeword MSB
// in column 0) and read out column by column, so neighbouring transmitted
// bits belong to different codewords: any burst of up to 8 bits inside a half
// touches each codeword at most twice and stays correctable by BCH(15,7,2).
// Index p = 15r + c (counted from the half's MSB) moves to q = 4c + r.
// Column 0 carries the header bits (one per codeword of the first half), so
// the header lands in frame bits 119..116 where the receiver's frame aligner
// looks for it.
//
// Purely combinational, no clock latency, as in the paper: in a parallel
// 120-bit datapath a block interleaver is a fixed permutation of wires, so
// after synthesis every output is simply one of the inputs. The split into two
// 60-bit blocks follows the paper; the 4 x 15 matrix shape is this design's
// choice.
module interleaver
  import daq_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 15
) (
  input  frame_t in_frame,
  output frame_t out_frame
);

  localparam int unsigned HALF = ROWS * COLS;

  always_comb begin
    out_frame = '0;
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < int'(ROWS); r++)
        for (int c = 0; c < int'(COLS); c++)
          out_frame[FRAME_W-1-HALF*h-(ROWS*c+r)] = in_frame[FRAME_W-1-HALF*h-(COLS*r+c)];
  end

endmodule
