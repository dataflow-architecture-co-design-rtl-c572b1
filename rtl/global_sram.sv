// global_sram: the global SRAM of the memory chiplet (13 MiB in the paper's system).
//
// It is filled from HBM, read by the distribution scheduler to feed the wireless transmitter,
// and written by the wired collection NoP with the chiplets' outputs. One read port of one
// wireless word (WORD_BYTES bytes) per cycle, matching the wireless bandwidth, and one write
// port of the same width with a byte strobe (the collection NoP writes half a word per
// cycle). Reads are synchronous: rdata is valid the cycle after re. A read and a write to the
// same word in one cycle return the old data. Capacity follows the paper; the port structure
// is this design's choice. Written as an array; a real chip would use SRAM macros.
module global_sram #(
  parameter int unsigned BYTES      = 13 * 1024 * 1024,
  parameter int unsigned WORD_BYTES = 32
) (
  input  logic                                      clk,
  input  logic                                      re,
  input  logic [$clog2(BYTES/WORD_BYTES)-1:0]       raddr,
  output logic [WORD_BYTES*8-1:0]                   rdata,
  input  logic                                      we,
  input  logic [$clog2(BYTES/WORD_BYTES)-1:0]       waddr,
  input  logic [WORD_BYTES-1:0]                     wstrb,
  input  logic [WORD_BYTES*8-1:0]                   wdata
);
  localparam int unsigned WORDS = BYTES / WORD_BYTES;

  logic [WORD_BYTES*8-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we)
      for (int b = 0; b < WORD_BYTES; b++)
        if (wstrb[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
  end
endmodule
