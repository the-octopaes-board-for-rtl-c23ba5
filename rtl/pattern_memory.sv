// pattern_memory: the on-chip hit-pattern store (the board's "MIF" image).
//
// 128 pages x 32 rows x 256 digits = 1 Mbit. The rows of a page are stored
// transposed: the word at address {page, digit} holds that digit of all 32
// rows, bit r = row r. Playing a page is then a run of 256 consecutive reads,
// and every PMT channel gets its next digit each clock. Page count, row count
// and row length follow the paper; the transposed layout and the write port
// (used to load the patterns, which on the real board are part of the device
// image) are this design's choices.
//
// Interface: one write port (wclk, we/waddr/wdata) and one read port (rclk,
// re/raddr) with clocks of their own, so patterns can be loaded from the
// board clock while the player runs from a daisy-chain clock line.
// Timing: synchronous read, rdata is valid the rclk cycle after re. With one
// clock on both ports, a read and a write of the same address in the same
// cycle return the old word. The array is not
// reset. A row length that is not a power of two is padded to one.
module pattern_memory #(
  parameter int unsigned N_PAGES  = 128,
  parameter int unsigned N_ROWS   = 32,
  parameter int unsigned N_DIGITS = 256,
  localparam int unsigned DEPTH   = N_PAGES * (2 ** $clog2(N_DIGITS)),
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic              wclk,
  input  logic              rclk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [N_ROWS-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [N_ROWS-1:0] rdata
);

  logic [N_ROWS-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
