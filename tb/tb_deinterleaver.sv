// tb_deinterleaver: checks that the deinterleaver undoes the interleaving.
//
// The reference interleaving is written here from its definition (read the
// 4 x 15 matrix of each half column by column). For random frames the
// deinterleaver's output must equal the frame before that reference
// interleaving; a one-hot sweep checks that the deinterleaver is a
// permutation.
// The inverse permutation is this design's 4 x 15 choice; the two 60-bit
// blocks follow the original description.
`include "tb_util.svh"
module tb_deinterleaver;
  logic [119:0] in_frame, out_frame;
  int checks = 0, failures = 0;

  deinterleaver dut (.*);

  function automatic logic [119:0] ref_ilv(input logic [119:0] f);
    logic [119:0] o;
    for (int h = 0; h < 2; h++)
      for (int q = 0; q < 60; q++)
        o[119 - 60*h - q] = f[119 - 60*h - (15*(q % 4) + q / 4)];
    return o;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      logic [119:0] f;
      f = 120'({$urandom, $urandom, $urandom, $urandom});
      in_frame = ref_ilv(f);
      #1;
      `CHECK(out_frame == f, "deinterleave(interleave(f)) == f")
    end
    for (int p = 0; p < 120; p++) begin
      in_frame = 120'b1 << p;
      #1;
      `CHECK($countones(out_frame) == 1, "one-hot stays one-hot")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
