// tb_tx_mux: checks the 120-to-40-bit MUX and its clock-domain crossing.
//
// Clocks: 40 MHz write side, 120 MHz read side (24 ns / 8 ns, exact 3:1 as
// when both come from one reference). Phase 1 writes 10 frames while the read
// side is held in reset: the RAM (8 frames) must report overflow and keep
// the first 8. After the reader is released they must come out as three
// 40-bit words each, most significant word first, and then idle words with
// underflow. Phase 2 writes one random frame every 40 MHz cycle: all must come
// out in order and, once reading has started, without a single gap.
// Widths and the 40/120 MHz clocks follow the original description; depth,
// start level and the overflow/underflow behaviour are this design's.
`include "tb_util.svh"
`timescale 1ns/1ps
module tb_tx_mux;
  logic wclk = 0, wrst = 1, rclk = 0, rrst = 1;
  logic in_valid = 0, overflow, out_valid, underflow;
  logic [119:0] in_frame = '0;
  logic [39:0]  out_word;
  int checks = 0, failures = 0;

  tx_mux dut (.*);

  always #12 wclk = ~wclk;
  always #4  rclk = ~rclk;

  logic [119:0] exp_q[$];
  int ovf = 0, unf = 0, words_ok = 0, gaps = 0;
  bit phase2 = 0, streaming = 0;
  logic [39:0] wbuf [3];
  int widx = 0;

  always @(posedge wclk) if (!wrst && overflow) ovf++;

  // reader-side checker: regroup words into frames
  always @(posedge rclk) begin
    #1;
    if (!rrst) begin
      if (underflow) unf++;
      if (out_valid) begin
        wbuf[widx] = out_word;
        widx++;
        if (phase2) streaming = 1;
        if (widx == 3) begin
          logic [119:0] e;
          widx = 0;
          e = exp_q.pop_front();
          `CHECK({wbuf[0], wbuf[1], wbuf[2]} == e, "frame read back as three words, MSW first")
          words_ok++;
        end
      end else if (phase2 && streaming && exp_q.size() > 2) begin
        gaps++;
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge wclk);
    wrst <= 0;
    // phase 1: reader held in reset, write 10 frames into 8 places
    for (int n = 0; n < 10; n++) begin
      logic [119:0] f;
      f = 120'({$urandom, $urandom, $urandom, $urandom});
      if (n < 8) exp_q.push_back(f);
      in_valid <= 1;
      in_frame <= f;
      @(posedge wclk);
    end
    in_valid <= 0;
    repeat (2) @(posedge wclk);
    `CHECK(ovf == 2, "two frames refused while full")
    @(posedge rclk);
    rrst <= 0;
    repeat (60) @(posedge rclk);
    `CHECK(exp_q.size() == 0, "stored frames drained")
    `CHECK(unf > 0, "idle words with underflow once empty")
    // phase 2: continuous stream; restart both sides
    wrst <= 1;
    @(posedge wclk);
    @(posedge rclk);
    rrst <= 1;
    repeat (3) @(posedge wclk);
    wrst <= 0;
    rrst <= 0;
    widx = 0;
    phase2 = 1;
    for (int n = 0; n < 300; n++) begin
      logic [119:0] f;
      f = 120'({$urandom, $urandom, $urandom, $urandom});
      exp_q.push_back(f);
      in_valid <= 1;
      in_frame <= f;
      @(posedge wclk);
    end
    in_valid <= 0;
    phase2 = 0;
    repeat (20) @(posedge wclk);
    `CHECK(exp_q.size() == 0, "all streamed frames came out")
    `CHECK(gaps == 0, "no gaps in the word stream once started")
    `CHECK(words_ok == 308, "frame count")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
