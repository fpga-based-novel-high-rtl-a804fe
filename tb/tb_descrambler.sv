// tb_descrambler: checks the descrambler against a bit-serial model.
//
// Random scrambled words are produced by a serial scrambler model
// (y[n] = d[n] ^ y[n-1] ^ y[n-3] ^ y[n-4] ^ y[n-13] per 13-bit lane) and fed
// to the descrambler; its output, one clock later, must equal the original
// data. A single flipped bit must disturb at most 5 output bits (the bit and
// its four taps) and the stream must recover on the following words.
// The lane split follows the original description; the polynomial and the
// error-spread bound belong to this design's scrambler choice.
`include "tb_util.svh"
module tb_descrambler;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [51:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  descrambler dut (.*);

  always #5 clk = ~clk;

  bit [12:0] hist [4];

  function automatic logic [51:0] scramble(input logic [51:0] d);
    logic [51:0] y;
    for (int k = 0; k < 4; k++)
      for (int t = 0; t < 13; t++) begin
        bit b;
        b = d[51 - 13*k - t] ^ hist[k][0] ^ hist[k][2] ^ hist[k][3] ^ hist[k][12];
        hist[k] = {hist[k][11:0], b};
        y[51 - 13*k - t] = b;
      end
    return y;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    foreach (hist[k]) hist[k] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      logic [51:0] d, y;
      bit v;
      v = ($urandom % 5) != 0;
      d = 52'({$urandom, $urandom});
      y = v ? scramble(d) : 52'({$urandom, $urandom});
      if (n == 200) y[20] = ~y[20];  // single channel error
      in_valid <= v;
      in_data  <= y;
      @(posedge clk);
      #1;
      `CHECK(out_valid == v, "out_valid one clock after in_valid")
      if (v) begin
        if (n == 200 || n == 201) begin
          bad += $countones(out_data ^ d);
        end else begin
          `CHECK(out_data == d, "descrambled word equals original data")
        end
      end
    end
    `CHECK(bad >= 1 && bad <= 5, "a single channel error spreads to at most 5 bits")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
