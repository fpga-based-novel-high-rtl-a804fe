// tb_bch_encoder: checks the eight-way BCH(15,7,2) encoder.
//
// The reference parity comes from a bit-serial LFSR divider by
// g(x) = x^8 + x^7 + x^6 + x^4 + 1, written here independently of the RTL.
// For random headers and data it checks every codeword of the 120-bit frame,
// the placement of message bits (header bit k at the head of codeword k),
// that each codeword is divisible by g(x), and the one-clock latency.
// BCH(15,7,2) x 8 and the one-clock latency follow the original description;
// the generator polynomial and bit mapping checked are this design's choices.
`include "tb_util.svh"
module tb_bch_encoder;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [3:0]   in_hdr = '0;
  logic [51:0]  in_data = '0;
  logic [119:0] out_frame;
  int checks = 0, failures = 0;

  bch_encoder dut (.*);

  always #5 clk = ~clk;

  // Serial LFSR encoder: feed message MSB first.
  function automatic logic [14:0] lfsr_enc(input logic [6:0] m);
    logic [7:0] r;
    r = '0;
    for (int i = 6; i >= 0; i--) begin
      bit fb;
      fb = m[i] ^ r[7];
      r  = {r[6:0], 1'b0};
      if (fb) r ^= 8'b1101_0001;  // g(x) without the x^8 term
    end
    return {m, r};
  endfunction

  function automatic bit divisible(input logic [14:0] c);
    logic [14:0] t;
    t = c;
    for (int i = 14; i >= 8; i--) if (t[i]) t ^= (15'h1D1 << (i - 8));
    return t == 0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 200; n++) begin
      logic [3:0] h;
      logic [51:0] d;
      logic [55:0] msgs;
      h = 4'($urandom);
      d = {20'($urandom), $urandom};
      if (n == 0) begin h = 4'b1010; d = '0; end
      in_valid <= 1;
      in_hdr   <= h;
      in_data  <= d;
      @(posedge clk);
      in_valid <= 0;
      #1;
      `CHECK(out_valid, "out_valid one clock after in_valid")
      // message order: header bit 3-k then six data bits for k<4, seven for k>=4
      msgs = {h[3], d[51:46], h[2], d[45:40], h[1], d[39:34], h[0], d[33:28], d[27:0]};
      for (int k = 0; k < 8; k++) begin
        logic [14:0] cw;
        cw = out_frame[119-15*k -: 15];
        `CHECK(cw == lfsr_enc(msgs[55-7*k -: 7]), "codeword equals LFSR reference")
        `CHECK(divisible(cw), "codeword divisible by g(x)")
      end
      @(posedge clk);
      #1;
      `CHECK(!out_valid, "out_valid drops after one word")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
