// local_memory: one bank of a chiplet's local memory (the chiplet has a weight bank and an
// input bank).
//
// The wireless receiver writes it one wireless word (WR_BYTES) at a time; the PE array reads a
// whole row of ROW_BYTES (one byte per PE) per cycle. A row therefore holds ROW_BYTES/WR_BYTES
// wireless words, and write address a lands in row a / SEGS, segment a % SEGS. Reads are
// synchronous: rdata is valid the cycle after re. The paper only names the local memory; the
// two-bank split, the row width and the depth (LMEM_ROWS rows) are this design's choices.
module local_memory #(
  parameter int unsigned ROWS      = 256,
  parameter int unsigned ROW_BYTES = 64,
  parameter int unsigned WR_BYTES  = 32
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(ROWS*ROW_BYTES/WR_BYTES)-1:0] waddr,  // in WR_BYTES words
  input  logic [WR_BYTES*8-1:0]               wdata,
  input  logic                                re,
  input  logic [$clog2(ROWS)-1:0]             raddr,  // in rows
  output logic [ROW_BYTES*8-1:0]              rdata
);
  localparam int unsigned SEGS = ROW_BYTES / WR_BYTES;
  localparam int unsigned SW   = (SEGS > 1) ? $clog2(SEGS) : 1;
  localparam int unsigned RW   = $clog2(ROWS);

  logic [WR_BYTES*8-1:0] mem [ROWS][SEGS];
  logic [RW-1:0]         wrow;
  logic [SW-1:0]         wseg;

  always_comb begin
    wrow = RW'(waddr / SEGS);
    wseg = SW'(waddr % SEGS);
  end

  always_ff @(posedge clk) begin
    if (we) mem[wrow][wseg] <= wdata;
    if (re)
      for (int s = 0; s < SEGS; s++) rdata[s*WR_BYTES*8 +: WR_BYTES*8] <= mem[raddr][s];
  end
endmodule
