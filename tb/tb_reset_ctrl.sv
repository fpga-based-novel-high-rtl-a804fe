// tb_reset_ctrl: checks the RESET / PLL_LOCKED / BUSY_O / DONE_O sequence.
//
// With RESET high or the PLL unlocked, rst_out must stay high and busy/done
// low. After both are released, busy must be high for exactly BUSY_CYCLES (8)
// clocks with rst_out still high, then done rises and rst_out falls in the
// same clock. Losing PLL lock later must restart the sequence.
// The RESET/PLL_Locked/BUSY_O/DONE_O signals follow the original description;
// the 8-clock busy phase is this design's choice.
`include "tb_util.svh"
module tb_reset_ctrl;
  logic clk = 0, reset = 1, pll_locked = 0, rst_out, busy, done;
  int checks = 0, failures = 0;

  reset_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sequence_check();
    int nbusy, guard;
    nbusy = 0;
    guard = 0;
    while (!done && guard < 50) begin
      @(posedge clk);
      #1;
      guard++;
      if (busy) begin
        nbusy++;
        `CHECK(rst_out, "fabric held in reset while busy")
      end
      if (!done) `CHECK(rst_out, "reset until done")
    end
    `CHECK(done && !busy && !rst_out, "done, not busy, reset released")
    `CHECK(nbusy == 8, "busy lasts BUSY_CYCLES clocks")
  endtask

  initial begin
    repeat (5) @(posedge clk);
    #1;
    `CHECK(rst_out && !busy && !done, "held while RESET and no lock")
    pll_locked = 1;
    repeat (5) @(posedge clk);
    #1;
    `CHECK(rst_out && !busy && !done, "held while RESET high")
    reset = 0;
    sequence_check();
    repeat (10) @(posedge clk);
    #1;
    `CHECK(done && !rst_out, "stays done")
    pll_locked = 0;
    repeat (3) @(posedge clk);
    #1;
    `CHECK(rst_out && !done, "loss of lock resets the fabric")
    pll_locked = 1;
    sequence_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
