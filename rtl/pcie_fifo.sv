// pcie_fifo: asynchronous FIFO between the receive chain and the PCIe side.
//
// Received data words are written in the fabric clock and read by the PCIe
// DMA logic in its own 125 MHz clock. Classic dual-clock FIFO: a RAM of DEPTH
// words, binary read/write pointers one bit wider than the address, exchanged
// between the domains in Gray code through two-flip-flop synchronisers. full
// and empty are therefore conservative (they clear a few clocks late).
// Show-ahead read port: rd_data holds the oldest word whenever empty is low;
// rd_en pops it.
//
// Interface: wr_clk: wr_en, wr_data, full. rd_clk: rd_en, rd_data, empty.
// Writes while full and reads while empty are ignored (and flagged by
// assertions in simulation). Separate synchronous active-high resets.
// The asynchronous FIFO and the 125 MHz read clock follow the paper; width,
// depth and the show-ahead port are this design's choices.
module pcie_fifo #(
  parameter int unsigned WIDTH = 117,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned PW = AW + 1;

  function automatic logic [PW-1:0] to_gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [PW-1:0] from_gray(input logic [PW-1:0] g);
    logic [PW-1:0] b;
    b[PW-1] = g[PW-1];
    for (int i = int'(PW) - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [WIDTH-1:0] mem [DEPTH];

  logic [PW-1:0] wptr, wptr_gray, rptr_gray_w;
  logic [PW-1:0] rptr, rptr_gray, wptr_gray_r;

  sync2 #(.W(PW)) u_sync_w2r (.clk(rd_clk), .rst(rd_rst), .d(wptr_gray), .q(wptr_gray_r));
  sync2 #(.W(PW)) u_sync_r2w (.clk(wr_clk), .rst(wr_rst), .d(rptr_gray), .q(rptr_gray_w));

  assign full  = (wptr - from_gray(rptr_gray_w)) == PW'(DEPTH);
  assign empty = (wptr_gray_r == rptr_gray);

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wptr      <= '0;
      wptr_gray <= '0;
    end else if (wr_en && !full) begin
      wptr      <= wptr + 1'b1;
      wptr_gray <= to_gray(wptr + 1'b1);
    end
  end

  always_ff @(posedge wr_clk)
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wr_data;

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rptr      <= '0;
      rptr_gray <= '0;
    end else if (rd_en && !empty) begin
      rptr      <= rptr + 1'b1;
      rptr_gray <= to_gray(rptr + 1'b1);
    end
  end

  assign rd_data = mem[rptr[AW-1:0]];

  a_no_write_when_full: assert property (@(posedge wr_clk) disable iff (wr_rst) !(wr_en && full))
    else $error("pcie_fifo: write while full, word dropped");
  a_no_read_when_empty: assert property (@(posedge rd_clk) disable iff (rd_rst) !(rd_en && empty))
    else $error("pcie_fifo: read while empty");

endmodule
