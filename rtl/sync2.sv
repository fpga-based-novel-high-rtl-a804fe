// sync2: two-flip-flop synchroniser for a W-bit vector.
//
// Used for Gray-coded RAM pointers and for resets that cross from one clock
// domain to another. Each bit of d is sampled twice in the destination clock;
// q follows d after two clock edges. Only Gray-coded multi-bit values (one
// bit changing at a time) or single bits may pass through it. Synchronous
// active-high reset loads RST_VAL.
// Synchronisers are not described for this link; this is the standard
// two-flip-flop form, a choice of this design.
module sync2 #(
  parameter int unsigned W       = 1,
  parameter logic [W-1:0] RST_VAL = '0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] meta;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= RST_VAL;
      q    <= RST_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end

endmodule
