// tb_rx_demux: checks the 40-to-120-bit DEMUX and its clock-domain crossing.
//
// The write side is driven the way the frame aligner drives it: one 40-bit
// word per 120 MHz clock at addresses 0,1,...,23,0,... (word 0 of a frame on
// addresses divisible by 3). The 40 MHz read side must deliver each frame
// whole, in order, as {word0, word1, word2}, and keep up with the writer.
// A second run holds the reader in reset so that the RAM fills up and
// overflow must be reported.
// Widths, clocks and the aligner-driven write address follow the original
// description; depth and overflow reporting are this design's.
`include "tb_util.svh"
`timescale 1ns/1ps
module tb_rx_demux;
  logic wclk = 0, wrst = 1, rclk = 0, rrst = 1;
  logic wr_en = 0, overflow, out_valid;
  logic [4:0]   wr_addr = '0;
  logic [39:0]  wr_data = '0;
  logic [119:0] out_frame;
  int checks = 0, failures = 0;

  rx_demux dut (.*);

  always #4  wclk = ~wclk;
  always #12 rclk = ~rclk;

  logic [119:0] exp_q[$];
  int frames_ok = 0, ovf = 0;
  bit check_on = 1;

  always @(posedge rclk) begin
    #1;
    if (!rrst && out_valid && check_on) begin
      `CHECK(out_frame == exp_q.pop_front(), "frame reassembled in order")
      frames_ok++;
    end
  end
  always @(posedge wclk) if (!wrst && overflow) ovf++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_frames(int n);
    for (int i = 0; i < n; i++) begin
      logic [119:0] f;
      f = 120'({$urandom, $urandom, $urandom, $urandom});
      exp_q.push_back(f);
      for (int w = 0; w < 3; w++) begin
        wr_en   <= 1;
        wr_data <= f[119 - 40*w -: 40];
        @(posedge wclk);
        wr_addr <= (wr_addr == 23) ? 5'd0 : wr_addr + 5'd1;
      end
    end
    wr_en <= 0;
  endtask

  initial begin
    repeat (3) @(posedge rclk);
    wrst <= 0;
    rrst <= 0;
    @(posedge wclk);
    write_frames(200);
    repeat (20) @(posedge rclk);
    `CHECK(exp_q.size() == 0 && frames_ok == 200, "all frames read, reader keeps pace")
    `CHECK(ovf == 0, "no overflow at matched rates")
    // reader stopped: RAM must fill and report overflow
    check_on = 0;
    rrst <= 1;
    repeat (3) @(posedge rclk);
    write_frames(12);
    repeat (5) @(posedge wclk);
    `CHECK(ovf > 0, "overflow reported when reader stalls")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
