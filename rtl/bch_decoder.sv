// bch_decoder: eight parallel BCH(15,7,2) decoders for one 120-bit frame.
//
// The de-interleaved frame holds eight 15-bit codewords (codeword k in bits
// 119-15k downto 105-15k). Each goes to its own bch15_dec, so up to two wrong
// bits per codeword, sixteen per frame, are corrected in the same clock. The
// 56 decoded message bits are split back into the 4-bit header and the 52
// data bits with the inverse of the bch_encoder mapping.
//
// Interface: in_valid/in_frame in; out_valid, out_hdr, out_data, out_nerr
// (total bits corrected in the frame, 0..16) and out_fail (some codeword had
// more than two errors) two clocks later.
// Eight parallel decoders and the 16-bit correction capability follow the
// paper; the two-clock pipeline and the status outputs are this design's.
module bch_decoder
  import daq_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  frame_t       in_frame,
  output logic         out_valid,
  output logic [3:0]   out_hdr,
  output logic [51:0]  out_data,
  output logic [4:0]   out_nerr,
  output logic         out_fail
);

  logic [N_BCH-1:0]       v;
  logic [BCH_K-1:0]       msg  [N_BCH];
  logic [1:0]             nerr [N_BCH];
  logic [N_BCH-1:0]       fail;

  for (genvar k = 0; k < N_BCH; k++) begin : g_dec
    bch15_dec u_dec (
      .clk      (clk),
      .rst      (rst),
      .in_valid (in_valid),
      .in_cw    (in_frame[FRAME_W-1-BCH_N*k -: BCH_N]),
      .out_valid(v[k]),
      .out_data (msg[k]),
      .out_nerr (nerr[k]),
      .out_fail (fail[k])
    );
  end

  always_comb begin
    out_valid = &v;  // all eight lanes run in lockstep
    out_fail  = |fail;
    out_nerr  = '0;
    out_hdr   = '0;
    out_data  = '0;
    for (int k = 0; k < int'(N_BCH); k++) begin
      out_nerr = out_nerr + 5'(nerr[k]);
      if (k < 4) begin
        out_hdr[3-k]          = msg[k][6];
        out_data[51-6*k -: 6] = msg[k][5:0];
      end else begin
        out_data[27-7*(k-4) -: 7] = msg[k];
      end
    end
  end

endmodule
