// descrambler: 52-bit parallel descrambler for the receiver.
//
// Inverse of the scrambler: four 13-bit lanes, each recovering a data bit as
// the received bit XORed with the received bits 1, 3, 4 and 13 bit-times
// earlier (polynomial 1 + x + x^3 + x^4 + x^13). It has no feedback, so it
// needs no seed: after the first valid word following reset every output is
// correct, and a bit error spreads to at most five output bits (the bit and
// its four taps) of the same and the next word. The previous received word and the output word are the
// registers (104 flip-flops for 52 bits).
//
// Interface: in_valid/in_data in, out_valid/out_data one clock later.
// Synchronous active-high reset clears the stored word to zero, matching the
// scrambler's reset state, so even the first word after a joint reset is
// recovered. The lane split follows the paper; the polynomial is this
// design's choice and must equal the scrambler's.
module descrambler
  import daq_pkg::*;
#(
  parameter int unsigned LANES  = 4,
  parameter int unsigned LANE_W = 13
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      in_valid,
  input  logic [LANES*LANE_W-1:0]   in_data,
  output logic                      out_valid,
  output logic [LANES*LANE_W-1:0]   out_data
);

  logic [LANES*LANE_W-1:0] prev_q;
  logic [LANES*LANE_W-1:0] dsc_next;

  always_comb begin
    logic [2*LANE_W-1:0] e;
    dsc_next = '0;
    for (int k = 0; k < LANES; k++) begin
      for (int t = 0; t < LANE_W; t++) begin
        e[t]          = prev_q[(LANES-k)*LANE_W - 1 - t];
        e[LANE_W + t] = in_data[(LANES-k)*LANE_W - 1 - t];
      end
      for (int t = 0; t < LANE_W; t++) begin
        logic b;
        b = e[LANE_W + t];
        for (int j = 0; j < SCR_NTAPS; j++)
          b ^= e[LANE_W + t - SCR_TAPS[j]];
        dsc_next[(LANES-k)*LANE_W - 1 - t] = b;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev_q    <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        prev_q   <= in_data;
        out_data <= dsc_next;
      end
    end
  end

endmodule
