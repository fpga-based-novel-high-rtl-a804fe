// tb_pcie_fifo: checks the dual-clock FIFO towards the PCIe side.
//
// Write clock 40 MHz (24 ns), read clock 125 MHz (7.68 ns), unrelated phase.
// A scoreboard queue holds what was written. Phase 1 writes while the reader
// is idle: full must rise after DEPTH (16) words and no word may be lost.
// Phase 2 reads and writes at random: every word must come out once, in
// order, and empty must be high when everything has been read.
// The dual-clock FIFO and 125 MHz read side follow the original description;
// the 40 MHz write clock and depth 16 are this design's choices.
`include "tb_util.svh"
`timescale 1ns/1ps
module tb_pcie_fifo;
  logic wr_clk = 0, wr_rst = 1, rd_clk = 0, rd_rst = 1;
  logic wr_en = 0, rd_en, full, empty;
  bit   rnd = 0;
  logic [116:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  pcie_fifo dut (.*);

  always #12   wr_clk = ~wr_clk;
  always #3.84 rd_clk = ~rd_clk;

  logic [116:0] sb[$];
  int nread = 0, nwritten = 0;
  bit reading = 0;

  // reader
  always @(posedge rd_clk) begin
    if (!rd_rst && rd_en && !empty) begin
      `CHECK(rd_data == sb.pop_front(), "data out in write order")
      nread++;
    end
    rnd <= ($urandom % 3 != 0);
  end
  assign rd_en = reading && !empty && rnd;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt;
    repeat (3) @(posedge wr_clk);
    wr_rst <= 0;
    rd_rst <= 0;
    // phase 1: fill
    cnt = 0;
    for (int n = 0; n < 25; n++) begin
      @(negedge wr_clk);
      if (!full) begin
        logic [116:0] d;
        d = {21'($urandom), $urandom, $urandom, $urandom};
        wr_en   = 1;
        wr_data = d;
        sb.push_back(d);
        cnt++;
      end else begin
        wr_en = 0;
      end
    end
    @(negedge wr_clk);
    wr_en = 0;
    `CHECK(cnt == 16, "full after 16 words")
    `CHECK(full, "full stays while nothing is read")
    // phase 2: random traffic
    reading = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge wr_clk);
      if (!full && ($urandom % 2 == 0)) begin
        logic [116:0] d;
        d = {21'($urandom), $urandom, $urandom, $urandom};
        wr_en   = 1;
        wr_data = d;
        sb.push_back(d);
      end else begin
        wr_en = 0;
      end
    end
    @(negedge wr_clk);
    wr_en = 0;
    repeat (20) @(posedge wr_clk);
    `CHECK(sb.size() == 0, "everything written was read")
    `CHECK(empty, "empty after draining")
    `CHECK(nread > 900, "enough traffic")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
