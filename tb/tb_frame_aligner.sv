// tb_frame_aligner: checks bit-slip search, lock and RAM addressing.
//
// A serial stream of 120-bit frames (header 1010 or 0101, random payload) is
// cut into 40-bit words starting at a random bit offset, as a deserialiser
// with unknown word boundaries would. For several offsets the aligner must
// assert header_lock only after the header has been confirmed 32 more times
// (at least 99 words after the first sighting), within 120 + 33*3 + slack
// words; afterwards every written word must be the transmitted frame word,
// header word on addresses divisible by 3, and wr_addr must count modulo 24.
// Lock must be kept across a corrupted header (the search has ended).
// The bit slip, the two headers and the 32 confirmations follow the original
// description; the lock-time bound and the permanent lock are this design's.
`include "tb_util.svh"
module tb_frame_aligner;
  logic clk = 0, rst = 1;
  logic [39:0] rx_word = '0, shift_word, wr_data;
  logic [3:0]  pattern;
  logic [5:0]  bs_count;
  logic        header_lock, wr_en;
  logic [4:0]  wr_addr;
  int checks = 0, failures = 0;

  frame_aligner dut (.*);

  always #5 clk = ~clk;

  bit bits[$];          // serial stream, MSB of each frame first
  logic [39:0] fw[$];   // transmitted frame words, in order

  function automatic void add_frame(bit nofec);
    logic [119:0] f;
    f = 120'({$urandom, $urandom, $urandom, $urandom});
    f[119:116] = nofec ? 4'b0101 : 4'b1010;
    for (int i = 119; i >= 0; i--) bits.push_back(f[i]);
    for (int w = 0; w < 3; w++) fw.push_back(f[119 - 40*w -: 40]);
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int run = 0; run < 6; run++) begin
      int off, cyc, lock_cyc, widx, slips;
      bit locked_seen;
      logic [4:0] last_addr;
      bits.delete();
      fw.delete();
      for (int n = 0; n < 200; n++) add_frame(n % 5 == 4);
      off = (run == 0) ? 0 : int'($urandom % 40);
      rst = 1;
      repeat (2) @(posedge clk);
      rst <= 0;
      for (int i = 0; i < off; i++) void'(bits.pop_front());
      cyc = 0;
      locked_seen = 0;
      widx = -1;
      slips = 0;
      while (bits.size() >= 40 && cyc < 550) begin
        logic [39:0] w;
        for (int i = 39; i >= 0; i--) w[i] = bits.pop_front();
        if (cyc == 400) w[39] = ~w[39];  // corrupt something after lock
        rx_word <= w;
        @(posedge clk);
        #1;
        cyc++;
        if (header_lock && !locked_seen) begin
          locked_seen = 1;
          lock_cyc = cyc;
        end
        if (wr_en) begin
          if (widx < 0) begin
            // first written word: must be a header word; find it
            `CHECK(wr_addr == 0, "first write at address 0")
            `CHECK(wr_data[39:36] == 4'b1010 || wr_data[39:36] == 4'b0101, "first written word holds a header")
            for (int k = 0; k < fw.size(); k += 3)
              if (fw[k] == wr_data && widx < 0) widx = k;
            `CHECK(widx >= 0, "first written word is a frame's first word")
          end else begin
            `CHECK(wr_addr == ((last_addr == 23) ? 5'd0 : last_addr + 5'd1), "address counts modulo 24")
            `CHECK(wr_data == fw[widx] || cyc >= 399, "written word equals transmitted word")
            `CHECK((wr_addr % 3 == 0) == (widx % 3 == 0), "header words on addresses divisible by 3")
          end
          last_addr = wr_addr;
          widx++;
        end
      end
      `CHECK(locked_seen, "header lock reached")
      `CHECK(locked_seen && lock_cyc <= 120 + 99 + 10, "lock within search + 32 confirmations")
      `CHECK(locked_seen && lock_cyc >= 99, "lock needs the 32 confirming headers")
      `CHECK(header_lock, "lock kept after a corrupted word")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
