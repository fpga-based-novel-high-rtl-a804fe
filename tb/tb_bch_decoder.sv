// tb_bch_decoder: checks the eight-way BCH(15,7,2) decoder.
//
// Frames are built from random headers and data with an LFSR reference
// encoder (independent of the RTL). Each codeword gets 0, 1 or 2 bit errors
// at distinct random positions; the decoder must return the original header
// and data two clocks later and report the number of corrected bits. Frames
// with three errors in one codeword must never be reported as clean: either
// the fail flag is raised or the output differs from the original.
// Back-to-back frames check the pipeline throughput of one frame per clock.
// Two-bit correction per codeword follows the original description; the
// two-clock latency and the nerr/fail outputs are this design's.
`include "tb_util.svh"
module tb_bch_decoder;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [119:0] in_frame = '0;
  logic         out_valid, out_fail;
  logic [3:0]   out_hdr;
  logic [51:0]  out_data;
  logic [4:0]   out_nerr;
  int checks = 0, failures = 0;

  bch_decoder dut (.*);

  always #5 clk = ~clk;

  function automatic logic [14:0] lfsr_enc(input logic [6:0] m);
    logic [7:0] r;
    r = '0;
    for (int i = 6; i >= 0; i--) begin
      bit fb;
      fb = m[i] ^ r[7];
      r  = {r[6:0], 1'b0};
      if (fb) r ^= 8'b1101_0001;
    end
    return {m, r};
  endfunction

  typedef struct {
    logic [3:0]  hdr;
    logic [51:0] data;
    int          nerr;
    bit          triple;
  } exp_t;

  exp_t q[$];
  int   fail_seen = 0, triples = 0;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: compares each output with the frame sent two clocks earlier
  int sent_cycle[$];
  int cycle = 0;
  always @(posedge clk) cycle++;

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      exp_t e;
      int c0;
      e  = q.pop_front();
      c0 = sent_cycle.pop_front();
      `CHECK(cycle - c0 == 2, "decoder latency is two clocks")
      if (e.triple) begin
        `CHECK(out_fail || out_data != e.data || out_hdr != e.hdr, "three errors never pass as clean")
        if (out_fail) fail_seen++;
      end else begin
        `CHECK(out_hdr == e.hdr && out_data == e.data, "corrected header and data")
        `CHECK(out_nerr == 5'(e.nerr), "number of corrected bits")
        `CHECK(!out_fail, "no fail flag for correctable frame")
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      exp_t e;
      logic [55:0]  msgs;
      logic [119:0] f;
      e.hdr  = 4'($urandom);
      e.data = {20'($urandom), $urandom};
      e.nerr = 0;
      e.triple = 0;
      msgs = {e.hdr[3], e.data[51:46], e.hdr[2], e.data[45:40], e.hdr[1], e.data[39:34],
              e.hdr[0], e.data[33:28], e.data[27:0]};
      for (int k = 0; k < 8; k++) begin
        logic [14:0] cw;
        int ne, p1, p2, p3;
        cw = lfsr_enc(msgs[55-7*k -: 7]);
        ne = (n % 50 == 7 && k == 3) ? 3 : int'($urandom % 3);
        p1 = $urandom % 15;
        p2 = (p1 + 1 + $urandom % 14) % 15;
        p3 = p2;
        while (p3 == p1 || p3 == p2) p3 = $urandom % 15;
        if (ne >= 1) cw[p1] = ~cw[p1];
        if (ne >= 2) cw[p2] = ~cw[p2];
        if (ne >= 3) begin cw[p3] = ~cw[p3]; e.triple = 1; end
        e.nerr += ne;
        f[119-15*k -: 15] = cw;
      end
      if (e.triple) triples++;
      q.push_back(e);
      sent_cycle.push_back(cycle + 1);
      in_valid <= 1;
      in_frame <= f;
      @(posedge clk);
      if (n % 7 == 0) begin
        in_valid <= 0;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    `CHECK(q.size() == 0, "every frame came out")
    `CHECK(triples > 0 && fail_seen > 0, "uncorrectable frames flagged")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
