// tb_daq_top: end-to-end test of the DAQ link with the design at its defaults.
//
// Clocks: fabric 40 MHz (24 ns), transceiver 120 MHz (8 ns), PCIe 125 MHz
// (7.68 ns). After PLL lock and RESET release the test waits for DONE_O, then
// sends 600 frames, one per fabric clock: 250 standard frames (52 random data
// bits), 100 frames without FEC (116 random bits), 250 standard frames.
// The optical link is modelled as a bit pipe: the 40-bit words on tx_word are
// serialised, a random number (1..39) of bits is dropped at the start so the
// receiver sees arbitrary word boundaries, and the stream is cut back into
// 40-bit words for rx_word. Once the receiver has surely locked, standard
// frames get channel errors: random bits (at most two per codeword), bursts
// of up to 8 bits inside one 60-bit half (spread by the interleaver), and,
// every 50th frame, three errors in one codeword (beyond the code: flagged
// or miscorrected), and twice the maximum of 16 errors (two per codeword).
// Checked: every frame received after lock equals what was sent (order, mode,
// data), that frames arrive one per 40 MHz clock without gaps (the paper's
// 2.08 and 4.64 Gb/s), the reported number of corrected bits, the fail flag,
// and that the
// PCIe FIFO hands out exactly the received frames. Each mechanism (bit slip,
// lock, both frame types, mode switch, random and burst correction,
// uncorrectable detection, PCIe read-out, BUSY_O) must occur at least once.
// Frame formats, rates and correction limits checked here follow the original
// description; the channel model and the error mix are this testbench's own.
`include "tb_util.svh"
`timescale 1ns/1ps
module tb_daq_top;
  logic clk40 = 0, clk120 = 0, clk125 = 0;
  logic reset = 1, pll_locked = 0, busy_o, done_o;
  logic tx_valid = 0, tx_fec = 1, tx_overflow;
  logic [115:0] tx_data = '0;
  logic [39:0]  tx_word, rx_word = '0, fa_shift_o;
  logic tx_word_valid, tx_underflow, header_lock_o, rx_overflow;
  logic [5:0]   bs_count;
  logic [3:0]   fa_pattern_o;
  logic rx_valid, rx_fec, rx_fail, rx_bad_hdr;
  logic [115:0] rx_data;
  logic [4:0]   rx_nerr;
  logic pcie_rd_en, pcie_empty, pcie_full;
  logic [116:0] pcie_rd_data;
  int checks = 0, failures = 0;

  daq_top dut (.*);

  always #12   clk40  = ~clk40;
  always #4    clk120 = ~clk120;
  always #3.84 clk125 = ~clk125;

  localparam int NFRAMES = 600;
  localparam int ERR_FROM = 150;  // frames from here on may carry errors

  // what was sent, by frame number
  bit           sent_fec  [NFRAMES];
  logic [115:0] sent_data [NFRAMES];
  int           exp_nerr  [NFRAMES];
  bit           exp_fail  [NFRAMES];
  bit           skip_data [NFRAMES];
  int nsent = 0;

  // mechanism counters
  int n_slip = 0, n_lock = 0, n_std = 0, n_raw = 0, n_switch = 0;
  int n_rand = 0, n_burst = 0, n_uncorr = 0, n_pcie = 0, n_busy = 0, n_max16 = 0;
  // throughput: clocks between the first matched frame and the last one
  int cyc40 = 0, sync_cyc = -1, sync_idx = -1, end_cyc = -1;
  always @(posedge clk40) cyc40++;

  // ---------------- channel model ----------------
  bit chan[$];
  logic [39:0] fbuf [3];
  int fwords = 0, txf = 0, drop;
  bit started_rx = 0, skip_next_std = 0;
  bit go = 0;  // set once DONE_O has risen after RESET was released
  always @(posedge clk40) if (!reset && done_o) go <= 1;

  // frame bit index (119..0) of bit c (0 = MSB) of codeword k after interleaving
  function automatic int ilv_pos(int k, int c);
    return 119 - 60 * (k / 4) - (4 * c + (k % 4));
  endfunction

  function automatic logic [119:0] add_errors(logic [119:0] f, int k);
    int kind;
    exp_nerr[k] = 0;
    exp_fail[k] = 0;
    if (f[119:116] != 4'b1010) return f;  // only standard frames
    if (skip_next_std) begin
      skip_data[k] = 1;
      skip_next_std = 0;
    end
    if (k < ERR_FROM) return f;
    if (k >= 200 && k % 50 == 0) begin
      // three errors in codeword 5: beyond the code's reach; the decoder
      // either flags it or miscorrects it into another codeword
      int c1, c2, c3;
      c1 = 1 + $urandom % 14;
      c2 = c1;
      while (c2 == c1) c2 = 1 + $urandom % 14;
      c3 = c1;
      while (c3 == c1 || c3 == c2) c3 = 1 + $urandom % 14;
      f[ilv_pos(5, c1)] ^= 1'b1;
      f[ilv_pos(5, c2)] ^= 1'b1;
      f[ilv_pos(5, c3)] ^= 1'b1;
      exp_fail[k]  = 1;
      skip_data[k] = 1;
      skip_next_std = 1;  // the descrambler carries the damage one frame on
      return f;
    end
    if (k == 160 || k == 410) begin
      // the most the code can correct: two errors in every codeword,
      // header bits left alone
      for (int cw = 0; cw < 8; cw++) begin
        f[ilv_pos(cw, 5)]  ^= 1'b1;
        f[ilv_pos(cw, 11)] ^= 1'b1;
      end
      exp_nerr[k] = 16;
      return f;
    end
    kind = $urandom % 20;
    if (kind < 7) begin
      // random errors, up to two per codeword; header bits only in codeword 0
      for (int cw = 0; cw < 8; cw++) begin
        int ne, c1, c2, lo;
        ne = $urandom % 3;
        lo = (cw > 0 && cw < 4) ? 1 : 0;
        c1 = lo + $urandom % (15 - lo);
        c2 = c1;
        while (c2 == c1) c2 = lo + $urandom % (15 - lo);
        if (ne >= 1) f[ilv_pos(cw, c1)] ^= 1'b1;
        if (ne >= 2) f[ilv_pos(cw, c2)] ^= 1'b1;
        exp_nerr[k] += ne;
      end
      if (exp_nerr[k] > 0) n_rand++;
    end else if (kind < 11) begin
      // burst of 1..8 bits inside one half, at most one header bit
      int h, len, s;
      h   = $urandom % 2;
      len = 1 + $urandom % 8;
      s   = (h == 0 ? 3 : 0) + $urandom % (60 - len + 1 - (h == 0 ? 3 : 0));
      for (int b = s; b < s + len; b++) f[119 - 60 * h - b] ^= 1'b1;
      exp_nerr[k] = len;
      n_burst++;
    end
    return f;
  endfunction

  always @(posedge clk120) begin
    #1;
    if (!go) begin
      // nothing is sent before start-up has finished
    end else if (tx_word_valid) begin
      fbuf[fwords] = tx_word;
      fwords++;
      if (fwords == 3) begin
        logic [119:0] f;
        fwords = 0;
        f = add_errors({fbuf[0], fbuf[1], fbuf[2]}, txf);
        txf++;
        for (int i = 119; i >= 0; i--) chan.push_back(f[i]);
      end
    end else if (fwords == 0) begin
      for (int i = 0; i < 40; i++) chan.push_back(1'b0);
    end
    if (!started_rx && chan.size() >= 200) begin
      started_rx = 1;
      for (int i = 0; i < drop; i++) void'(chan.pop_front());
    end
    if (started_rx && chan.size() >= 40) begin
      logic [39:0] w;
      for (int i = 39; i >= 0; i--) w[i] = chan.pop_front();
      rx_word <= w;
    end
  end

  // ---------------- receiver checks ----------------
  int  idx = -1, presync = 0;
  bit  last_fec = 1, have_last = 0;
  logic [116:0] pq[$];
  int  prev_bs = 0;
  bit  prev_lock = 0;

  int n_underflow = 0, n_badhdr = 0;
  always @(posedge clk120) if (tx_underflow && txf > 0 && txf < NFRAMES) n_underflow++;
  always @(posedge clk40) if (rx_bad_hdr) n_badhdr++;

  always @(posedge clk120) begin
    if (int'(bs_count) != prev_bs) n_slip++;
    prev_bs = int'(bs_count);
    if (go && header_lock_o && !prev_lock) n_lock++;
    prev_lock = header_lock_o;
  end

  always @(posedge clk40) begin
    #1;
    if (busy_o && !reset) n_busy++;
    if (go && rx_valid) begin
      pq.push_back({rx_fec, rx_data});
      if (rx_fec) n_std++; else n_raw++;
      if (have_last && rx_fec != last_fec) n_switch++;
      have_last = 1;
      last_fec  = rx_fec;
      if (idx < 0) begin
        for (int k = 0; k < nsent; k++)
          if (sent_fec[k] == rx_fec &&
              (rx_fec ? (rx_data == {64'b0, sent_data[k][51:0]}) : (rx_data == sent_data[k])))
            idx = k;
        if (idx < 0) presync++;
        else begin
          sync_cyc = cyc40;
          sync_idx = idx;
        end
      end else if (idx < NFRAMES - 1) begin
        idx++;
        if (idx == NFRAMES - 1) end_cyc = cyc40;
        if ((idx == 160 || idx == 410) && rx_nerr == 5'd16) n_max16++;
        `CHECK(rx_fec == sent_fec[idx], "frame type as sent")
        if (rx_fec != sent_fec[idx]) $display("idx=%0d fec %0d", idx, rx_fec);
        if (sent_fec[idx]) begin
          if (!skip_data[idx])
            `CHECK(rx_data == {64'b0, sent_data[idx][51:0]}, "standard frame data recovered")
          if (exp_fail[idx]) begin
            if (rx_fail) n_uncorr++;
          end else begin
            `CHECK(!rx_fail, "no fail flag on a correctable frame")
            `CHECK(int'(rx_nerr) == exp_nerr[idx], "number of corrected bits")
          end
        end else begin
          `CHECK(rx_data == sent_data[idx], "raw frame data")
          if (rx_data != sent_data[idx]) $display("idx=%0d got %h exp %h", idx, rx_data, sent_data[idx]);
        end
      end else begin
        `CHECK(0, "frame received beyond the last one sent")
      end
    end
  end

  // PCIe side: read whenever there is data
  assign pcie_rd_en = go && !pcie_empty;
  always @(posedge clk125) begin
    if (pcie_rd_en) begin
      `CHECK(pq.size() > 0 && pcie_rd_data == pq.pop_front(), "PCIe FIFO hands out received frames")
      n_pcie++;
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
    drop = 1 + $urandom % 39;
    foreach (skip_data[k]) skip_data[k] = 0;
    #100 pll_locked = 1;
    #100 reset = 0;
    wait (done_o);
    @(posedge clk40);
    for (int n = 0; n < NFRAMES; n++) begin
      bit fec;
      logic [115:0] d;
      fec = !(n >= 250 && n < 350);
      d   = {20'($urandom), $urandom, $urandom, $urandom};
      if (fec) d[115:52] = '0;
      sent_fec[n]  = fec;
      sent_data[n] = d;
      nsent = n + 1;
      tx_valid <= 1;
      tx_fec   <= fec;
      tx_data  <= d;
      @(posedge clk40);
    end
    tx_valid <= 0;
    repeat (60) @(posedge clk40);
    `CHECK(idx == NFRAMES - 1, "received up to the last frame sent")
    `CHECK(presync <= 1, "at most the first frame after lock is lost")
    `CHECK(pq.size() == 0, "PCIe read-out complete")
    `CHECK(!tx_overflow && !rx_overflow && n_underflow == 0, "no RAM overflow or underflow while streaming")
    `CHECK(n_badhdr > 0, "idle frames after the last one are dropped")
    `CHECK(end_cyc - sync_cyc == NFRAMES - 1 - sync_idx,
           "one frame per 40 MHz clock: 52 bits (2.08 Gb/s) or 116 bits (4.64 Gb/s) per clock")
    `CHECK(n_max16 == 2, "16 corrected bits in one frame")
    $display("mechanisms: slips=%0d lock=%0d std=%0d raw=%0d switch=%0d rand=%0d burst=%0d uncorr=%0d pcie=%0d busy=%0d badhdr=%0d",
             n_slip, n_lock, n_std, n_raw, n_switch, n_rand, n_burst, n_uncorr, n_pcie, n_busy, n_badhdr);
    `CHECK(n_slip > 0, "bit slip happened")
    `CHECK(n_lock == 1, "header lock happened once")
    `CHECK(n_std > 0 && n_raw > 0, "both frame types received")
    `CHECK(n_switch >= 2, "mode switched and back")
    `CHECK(n_rand > 0, "random errors corrected")
    `CHECK(n_burst > 0, "burst errors corrected")
    `CHECK(n_uncorr > 0, "uncorrectable codewords flagged")
    `CHECK(n_pcie > 0, "PCIe read-out happened")
    `CHECK(n_busy > 0, "BUSY_O seen during start-up")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
