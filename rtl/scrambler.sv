// scrambler: 52-bit parallel self-synchronising scrambler for the sender.
//
// The 52 input bits are split into four 13-bit lanes (lane k = bits
// 51-13k downto 39-13k) that are scrambled side by side, as the paper
// describes. Each lane is a multiplicative scrambler with the degree-13
// polynomial 1 + x + x^3 + x^4 + x^13: in time order (lane MSB first) every
// output bit is the input bit XORed with the lane's own output 1, 3, 4 and 13
// bit-times earlier. Thirteen bits are produced per clock, so the lane's state
// is exactly its previous 13-bit output word, which is also the registered
// output. Scrambling adds no bits to the frame.
//
// Interface: in_valid/in_data in, out_valid/out_data one clock later (the
// paper's one-cycle latency). The state only advances on valid words.
// Synchronous active-high reset clears the state to zero.
// The lane split and one-cycle latency follow the paper; the polynomial and
// the multiplicative (self-synchronising) structure are this design's choice.
module scrambler
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

  logic [LANES*LANE_W-1:0] scr_next;

  // Per lane: e[0..LANE_W-1] is the previous output word in time order,
  // e[LANE_W + t] the new output bit t (t = 0 is the lane MSB).
  always_comb begin
    logic [2*LANE_W-1:0] e;
    scr_next = '0;
    for (int k = 0; k < LANES; k++) begin
      e = '0;
      for (int t = 0; t < LANE_W; t++)
        e[t] = out_data[(LANES-k)*LANE_W - 1 - t];
      for (int t = 0; t < LANE_W; t++) begin
        logic b;
        b = in_data[(LANES-k)*LANE_W - 1 - t];
        for (int j = 0; j < SCR_NTAPS; j++)
          b ^= e[LANE_W + t - SCR_TAPS[j]];
        e[LANE_W + t] = b;
        scr_next[(LANES-k)*LANE_W - 1 - t] = b;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= scr_next;
    end
  end

endmodule
