// bch_encoder: eight parallel BCH(15,7,2) encoders forming a 120-bit frame.
//
// The 4-bit frame header and the 52 scrambled data bits (56 bits) are cut
// into eight 7-bit messages; each is encoded into a systematic 15-bit
// codeword {message, 8 parity bits}, parity = message * x^8 mod g(x) with
// g(x) = x^8 + x^7 + x^6 + x^4 + 1. Codeword k occupies frame bits
// 119-15k downto 105-15k.
// Message mapping: message k (k = 0..3) is {hdr[3-k], data[51-6k -: 6]},
// message k (k = 4..7) is data[27-7(k-4) -: 7]. Putting one header bit at the
// head of each of the first four codewords lets the interleaver gather the
// header into frame bits 119..116 of the transmitted frame.
//
// Timing: one clock of latency (registered output), as in the paper.
// Synchronous active-high reset clears out_valid.
// Eight parallel (15,7,2) encoders, the 56-bit input and the 120-bit output
// follow the paper; the generator polynomial and the bit mapping are this
// design's choices (the paper's frame-map figure is not available).
module bch_encoder
  import daq_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [3:0]   in_hdr,
  input  logic [51:0]  in_data,
  output logic         out_valid,
  output frame_t       out_frame
);

  frame_t enc;

  always_comb begin
    logic [BCH_K-1:0] msg;
    enc = '0;
    for (int k = 0; k < int'(N_BCH); k++) begin
      if (k < 4) msg = {in_hdr[3-k], in_data[51-6*k -: 6]};
      else       msg = in_data[27-7*(k-4) -: 7];
      enc[FRAME_W-1-BCH_N*k -: BCH_N] = bch_encode(msg);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_frame <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_frame <= enc;
    end
  end

endmodule
