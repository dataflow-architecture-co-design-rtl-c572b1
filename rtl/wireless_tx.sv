// wireless_tx: digital side of the single wireless transmitter at the global SRAM.
//
// In the paper the wireless plane only distributes data from memory to the chiplets, with one
// transmitter and one receiver per chiplet, so there are no collisions, no arbiter and the
// transmitter is never refused: it takes one frame (header + WL_BYTES payload) per cycle
// from the scheduler and drives it onto the channel one cycle later. It counts the unicast and
// multicast words (broadcasts included) it has sent; from these and the receivers' counts
// the multicast factor (words received over words sent) follows. Registering the frame and the counters are this
// design's choices.
module wireless_tx
  import wienna_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  input  wl_hdr_t               req_hdr,
  input  logic [WL_BYTES*8-1:0] req_data,
  output logic                  tx_valid,
  output wl_hdr_t               tx_hdr,
  output logic [WL_BYTES*8-1:0] tx_data,
  output logic [31:0]           n_unicast,
  output logic [31:0]           n_bcast
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid  <= 1'b0;
      tx_hdr    <= '0;
      tx_data   <= '0;
      n_unicast <= '0;
      n_bcast   <= '0;
    end else begin
      tx_valid <= req_valid;
      if (req_valid) begin
        tx_hdr  <= req_hdr;
        tx_data <= req_data;
        if (req_hdr.bcast) n_bcast   <= n_bcast + 1;
        else               n_unicast <= n_unicast + 1;
      end
    end
  end
endmodule
