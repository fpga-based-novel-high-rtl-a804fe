// tb_interleaver: checks the bit permutation of the interleaver.
//
// Every one of the 120 input bits is driven alone (one-hot); the single
// output bit must appear where column-wise reading of the 4 x 15 matrix puts
// it: output index q of a half (from its MSB) carries input index
// 15*(q mod 4) + q/4. It also checks, on random frames, that the header
// bits (MSB of the first four codewords) land in bits 119..116 and that any
// 8 consecutive output bits of a half hold at most two bits of any codeword.
// Two 60-bit blocks and zero latency follow the original description; the
// 4 x 15 shape and the header placement are this design's choices.
`include "tb_util.svh"
module tb_interleaver;
  logic [119:0] in_frame, out_frame;
  int checks = 0, failures = 0;

  interleaver dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int src [120];
    // one-hot sweep: record which input feeds each output bit
    for (int p = 0; p < 120; p++) begin
      in_frame = 120'b1 << (119 - p);
      #1;
      `CHECK($countones(out_frame) == 1, "one-hot stays one-hot")
      for (int q = 0; q < 120; q++) if (out_frame[119 - q]) src[q] = p;
    end
    for (int h = 0; h < 2; h++)
      for (int q = 0; q < 60; q++)
        `CHECK(src[60*h + q] == 60*h + 15*(q % 4) + q / 4, "column-wise read order")
    // bursts of 8 within a half hit each codeword at most twice
    for (int h = 0; h < 2; h++)
      for (int s = 0; s + 8 <= 60; s++) begin
        int hits [8];
        int mx;
        foreach (hits[i]) hits[i] = 0;
        for (int b = s; b < s + 8; b++) hits[src[60*h + b] / 15]++;
        mx = 0;
        foreach (hits[i]) if (hits[i] > mx) mx = hits[i];
        `CHECK(mx <= 2, "8-bit burst touches a codeword at most twice")
      end
    for (int n = 0; n < 50; n++) begin
      in_frame = 120'({$urandom, $urandom, $urandom, $urandom});
      #1;
      `CHECK(out_frame[119:116] == {in_frame[119], in_frame[104], in_frame[89], in_frame[74]},
             "header bits gathered into bits 119..116")
      `CHECK($countones(out_frame) == $countones(in_frame), "permutation keeps the weight")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
