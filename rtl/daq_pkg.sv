// daq_pkg: constants, types and small arithmetic shared by the DAQ link blocks.
//
// Frame geometry: a 120-bit frame is sent every 40 MHz fabric cycle as three
// 40-bit words at 120 MHz (4.8 Gb/s line rate). A standard frame carries a
// 4-bit header 1010 and 52 scrambled data bits protected by eight BCH(15,7,2)
// codewords; a frame without FEC carries header 0101 and 116 raw data bits.
// These numbers follow the paper. The scrambler polynomial, the BCH generator
// polynomial and the Galois field polynomial are not given there; the standard
// choices used here are noted next to each constant.
package daq_pkg;

  localparam int unsigned DATA_W    = 52;   // user data bits per standard frame
  localparam int unsigned RAW_W     = 116;  // data bits per frame without FEC
  localparam int unsigned HDR_W     = 4;
  localparam int unsigned FRAME_W   = 120;
  localparam int unsigned WORD_W    = 40;   // MGT parallel word
  localparam int unsigned WORDS_PER_FRAME = FRAME_W / WORD_W;  // 3
  localparam int unsigned BCH_N     = 15;
  localparam int unsigned BCH_K     = 7;
  localparam int unsigned BCH_P     = BCH_N - BCH_K;            // 8 parity bits
  localparam int unsigned N_BCH     = 8;    // parallel encoders/decoders

  localparam logic [3:0] HDR_STD   = 4'b1010;  // standard frame (with FEC)
  localparam logic [3:0] HDR_NOFEC = 4'b0101;  // frame without FEC

  typedef logic [FRAME_W-1:0] frame_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [BCH_N-1:0]   cw_t;

  // Receiver-side frame type, decided from the received header.
  typedef enum logic [0:0] {FRAME_STD = 1'b0, FRAME_NOFEC = 1'b1} frame_kind_e;

  // Multiplicative scrambler polynomial 1 + x + x^3 + x^4 + x^13 (a primitive
  // polynomial of degree 13), given as the list of delays that feed back.
  localparam int unsigned SCR_NTAPS = 4;
  localparam int unsigned SCR_TAPS [SCR_NTAPS] = '{1, 3, 4, 13};

  // BCH(15,7,2) generator g(x) = x^8 + x^7 + x^6 + x^4 + 1, over GF(16)
  // built from p(x) = x^4 + x + 1. Bit i of a vector is the coefficient of x^i.
  localparam logic [8:0] BCH_GEN = 9'b1_1101_0001;

  // GF(16) multiply, modulo x^4 + x + 1.
  function automatic logic [3:0] gf_mul(input logic [3:0] a, input logic [3:0] b);
    logic [3:0] r;
    logic [3:0] aa;
    r  = '0;
    aa = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) r ^= aa;
      aa = aa[3] ? ({aa[2:0], 1'b0} ^ 4'b0011) : {aa[2:0], 1'b0};
    end
    return r;
  endfunction

  // alpha^e for e = 0..14 (alpha = x).
  function automatic logic [3:0] gf_alpha(input int unsigned e);
    logic [3:0] r;
    r = 4'b0001;
    for (int i = 0; i < 15; i++)
      if (i < int'(e % 15)) r = gf_mul(r, 4'b0010);
    return r;
  endfunction

  // Multiplicative inverse: a^14 (a^15 = 1 for a != 0). Returns 0 for 0.
  function automatic logic [3:0] gf_inv(input logic [3:0] a);
    logic [3:0] r;
    r = 4'b0001;
    for (int i = 0; i < 14; i++) r = gf_mul(r, a);
    return r;
  endfunction

  // Systematic BCH(15,7) encoding: codeword = {data, (data * x^8) mod g(x)}.
  function automatic cw_t bch_encode(input logic [BCH_K-1:0] d);
    logic [BCH_N-1:0] rem;
    rem = {d, 8'b0};
    for (int i = BCH_N - 1; i >= BCH_P; i--)
      if (rem[i]) rem ^= (BCH_N'(BCH_GEN) << (i - BCH_P));
    return {d, rem[BCH_P-1:0]};
  endfunction

  // Gray code helpers for the clock-domain-crossing pointers.
  function automatic logic [7:0] bin2gray(input logic [7:0] b);
    return b ^ (b >> 1);
  endfunction

endpackage
