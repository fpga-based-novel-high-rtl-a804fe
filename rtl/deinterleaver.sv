// deinterleaver: restores codeword order on the receive side.
//
// Exact inverse of the interleaver: in each 60-bit half, the bit received at
// index q = 4c + r (counted from the half's MSB) goes back to p = 15r + c, so
// the four 15-bit codewords of the half are contiguous again.
//
// Purely combinational, no clock latency: a fixed permutation of wires. The 4 x 15 matrix shape is this
// design's choice and must match the interleaver.
module deinterleaver
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
          out_frame[FRAME_W-1-HALF*h-(COLS*r+c)] = in_frame[FRAME_W-1-HALF*h-(ROWS*c+r)];
  end

endmodule
