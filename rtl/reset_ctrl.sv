// reset_ctrl: start-up sequencing of the DAQ fabric (RESET, BUSY_O, DONE_O).
//
// The fabric is held in reset while the external RESET is high or the PLL
// has not locked. When both are released (sampled through a two-flip-flop
// synchroniser), BUSY_O is raised for BUSY_CYCLES clocks while the blocks
// are still held in reset, then BUSY_O falls, DONE_O rises and the fabric
// reset (rst_out) is released. Any later RESET or loss of lock starts over.
//
// Interface: clk (fabric clock), reset and pll_locked (asynchronous inputs),
// rst_out (synchronous active-high reset for the fabric), busy, done.
// The signal names and their order of events follow the paper's signal table
// and timing diagram; the length of the busy phase is this design's choice.
module reset_ctrl #(
  parameter int unsigned BUSY_CYCLES = 8
) (
  input  logic clk,
  input  logic reset,
  input  logic pll_locked,
  output logic rst_out,
  output logic busy,
  output logic done
);

  logic hold, hold_s;
  logic [$clog2(BUSY_CYCLES+1)-1:0] cnt;

  assign hold = reset || !pll_locked;

  sync2 #(.W(1), .RST_VAL(1'b1)) u_sync (.clk(clk), .rst(reset), .d(hold), .q(hold_s));

  // RESET also acts directly, so the outputs are defined from the first
  // clock edge while RESET is high (power-up).
  always_ff @(posedge clk) begin
    if (reset || hold_s) begin
      cnt     <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      rst_out <= 1'b1;
    end else if (!done) begin
      if (cnt == $bits(cnt)'(BUSY_CYCLES)) begin
        busy    <= 1'b0;
        done    <= 1'b1;
        rst_out <= 1'b0;
      end else begin
        cnt  <= cnt + 1'b1;
        busy <= 1'b1;
      end
    end
  end

endmodule
