// wireless_channel: behavioural model, not synthesizable logic. It stands for the analog part
// of the wireless plane: the transmitter's RF front end and TSV antenna, the in-package
// propagation medium, and the receivers' antennas and RF front ends.
//
// The paper's wireless plane is single-hop: a frame sent by the transmitter reaches every
// receiver in the package in the same cycle, which makes a broadcast cost no more than a
// unicast. The model delivers each frame to the shared receiver bus one clock after it is sent.
// Bit errors can be injected: with ERR_PER_MILLION > 0 a frame has that probability, per
// million frames, of one payload bit flipped (the paper quotes error rates of 1e-9 to 1e-12,
// so 0, the default, is the realistic setting for simulation). The one-cycle latency and the
// error model are this design's own choices.
module wireless_channel
  import wienna_pkg::*;
#(
  parameter int unsigned ERR_PER_MILLION = 0
) (
  input  logic                  clk,
  input  logic                  tx_valid,
  input  wl_hdr_t               tx_hdr,
  input  logic [WL_BYTES*8-1:0] tx_data,
  output logic                  rx_valid,
  output wl_hdr_t               rx_hdr,
  output logic [WL_BYTES*8-1:0] rx_data
);
  initial begin
    rx_valid = 1'b0;
    rx_hdr   = '0;
    rx_data  = '0;
  end

  always @(posedge clk) begin
    logic [WL_BYTES*8-1:0] d;
    int unsigned           bit_idx;
    d = tx_data;
    if (ERR_PER_MILLION != 0 && tx_valid && ($urandom % 1000000) < ERR_PER_MILLION) begin
      bit_idx = $urandom % (WL_BYTES*8);
      d[bit_idx] = !d[bit_idx];
    end
    rx_valid <= tx_valid;
    rx_hdr   <= tx_hdr;
    rx_data  <= d;
  end
endmodule
