// tb_scrambler: checks the 52-bit scrambler against a bit-serial model.
//
// The model runs each 13-bit lane as a serial multiplicative scrambler
// (y[n] = d[n] ^ y[n-1] ^ y[n-3] ^ y[n-4] ^ y[n-13], lane MSB first) over the
// whole stream, independently of the parallel RTL. Random words, with random
// gaps in in_valid, are compared with out_data one clock after they enter;
// the one-clock latency itself is checked. A long run of zeros must come out
// with ones in it (the DC-balance purpose).
// The 4 x 13 lane split and one-clock latency checked here follow the original
// description; the polynomial is this design's choice.
`include "tb_util.svh"
module tb_scrambler;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [51:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  scrambler dut (.*);

  always #5 clk = ~clk;

  // serial model state: per lane, the last 13 output bits (index 0 = newest)
  bit [12:0] hist [4];

  function automatic logic [51:0] model(input logic [51:0] d);
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
    logic [51:0] exp;
    int ones;
    foreach (hist[k]) hist[k] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      logic [51:0] d;
      bit v;
      v = ($urandom % 4) != 0;
      d = (n >= 300) ? 52'h0 : 52'({$urandom, $urandom});
      in_valid <= v;
      in_data  <= d;
      @(posedge clk);
      #1;
      `CHECK(out_valid == v, "out_valid one clock after in_valid")
      if (v) begin
        exp = model(d);
        `CHECK(out_data == exp, "scrambled word matches serial model")
        if (n >= 300) ones += $countones(out_data);
      end
    end
    `CHECK(ones > 0, "all-zero input is scrambled into a mixed pattern")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
