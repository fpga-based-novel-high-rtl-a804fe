// bch15_dec: decoder for one BCH(15,7,2) codeword, two pipeline stages.
//
// Stage 1 computes the syndromes S1 = c(alpha) and S3 = c(alpha^3) over
// GF(16) and from them the error locator polynomial
// X^2 + s1 X + s2 with s1 = S1, s2 = (S3 + S1^3) / S1 (Peterson's direct
// solution for t = 2). Stage 2 is a fully parallel Chien search: every
// position i = 0..14 is tested for alpha^i being a root, and the bits found
// are flipped. If the number of roots differs from the locator's degree, or
// S1 = 0 while S3 != 0, more than two bits are wrong: the word is passed on
// uncorrected and `fail` is set.
//
// Interface: in_valid/in_cw in, out_valid/out_data (7 message bits),
// out_nerr (bits corrected, 0..2) and out_fail two clocks later.
// The three decoding steps follow the paper; the Peterson formula, the
// parallel Chien search and the failure flag are this design's choices.
module bch15_dec
  import daq_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  cw_t              in_cw,
  output logic             out_valid,
  output logic [BCH_K-1:0] out_data,
  output logic [1:0]       out_nerr,
  output logic             out_fail
);

  // ---- stage 1: syndromes and error locator ----
  logic [3:0] s1, s3, sig1, sig2;
  logic       bad_syn;

  always_comb begin
    logic [3:0] s1_cube;
    s1 = '0;
    s3 = '0;
    for (int i = 0; i < int'(BCH_N); i++) begin
      if (in_cw[i]) begin
        s1 ^= gf_alpha(i);
        s3 ^= gf_alpha(3 * i);
      end
    end
    s1_cube = gf_mul(s1, gf_mul(s1, s1));
    sig1    = s1;
    sig2    = gf_mul(s3 ^ s1_cube, gf_inv(s1));
    bad_syn = (s1 == 4'd0) && (s3 != 4'd0);
  end

  logic             v1;
  logic [BCH_K-1:0] cw1;  // message part of the received codeword
  logic [3:0] sig1_q, sig2_q;
  logic       bad_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1     <= 1'b0;
      cw1    <= '0;
      sig1_q <= '0;
      sig2_q <= '0;
      bad_q  <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        cw1    <= in_cw[BCH_N-1 -: BCH_K];
        sig1_q <= sig1;
        sig2_q <= sig2;
        bad_q  <= bad_syn;
      end
    end
  end

  // ---- stage 2: Chien search and correction ----
  logic [BCH_K-1:0] err_pos;   // error flags of the message bits
  logic [BCH_K-1:0] corrected;
  logic [3:0] nroots;
  logic [1:0] degree;

  always_comb begin
    logic [3:0] x;
    err_pos = '0;
    nroots  = '0;
    for (int i = 0; i < int'(BCH_N); i++) begin
      x = gf_alpha(i);
      if (sig1_q != 4'd0 && (gf_mul(x, x) ^ gf_mul(sig1_q, x) ^ sig2_q) == 4'd0) begin
        if (i >= int'(BCH_P)) err_pos[i - int'(BCH_P)] = 1'b1;
        nroots = nroots + 4'd1;
      end
    end
    corrected = cw1 ^ err_pos;
    degree = (sig1_q == 4'd0) ? 2'd0 : (sig2_q == 4'd0) ? 2'd1 : 2'd2;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_nerr  <= '0;
      out_fail  <= 1'b0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        if (bad_q || nroots != {2'b00, degree}) begin
          out_data <= cw1;
          out_nerr <= 2'd0;
          out_fail <= 1'b1;
        end else begin
          out_data <= corrected;
          out_nerr <= degree;
          out_fail <= 1'b0;
        end
      end
    end
  end

endmodule
