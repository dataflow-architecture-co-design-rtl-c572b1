// wireless_rx: digital side of a chiplet's wireless receiver.
//
// Every cycle the wireless channel may deliver one frame (header + WL_BYTES payload) to all
// receivers at once. A receiver takes a frame if it is a unicast to its own id or a multicast
// whose set includes it, and ignores the rest, as the paper notes receivers can decide at run
// time whether to process a transfer (a receiver not addressed can stay powered down: rx_on
// shows when the front end had to be on). A multicast set is the id range 0..dst, so one frame
// can reach all chiplets (dst = all ones) or just the chiplets active in a layer; the paper
// names multicast to a set of receivers but not how a set is encoded, and the prefix range is
// this design's choice. Taken frames are decoded by kind: weight and input words are written to the
// two local memory banks, a configuration word is latched for the coming layer, and a start
// frame starts one compute round, but only on chiplets whose id is below the configured number
// of active chiplets. The frame format and the decode are this design's choices.
// Timing: memory writes, configuration and start happen in the cycle the frame is present.
module wireless_rx
  import wienna_pkg::*;
#(
  parameter int unsigned WADDR_W = 9
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [9:0]           chip_id,
  input  logic                 rx_valid,
  input  wl_hdr_t              rx_hdr,
  input  logic [WL_BYTES*8-1:0] rx_data,
  output logic                 rx_on,     // frame is addressed to this receiver
  output logic                 w_we,
  output logic                 i_we,
  output logic [WADDR_W-1:0]   waddr,
  output logic [WL_BYTES*8-1:0] wdata,
  output chip_cfg_t            cfg,
  output logic                 cfg_load,  // pulse: a new configuration was taken
  output logic                 start,     // pulse: compute one round
  output logic [31:0]          words_rx   // words taken since reset
);
  logic take;

  always_comb begin
    take     = rx_valid && (rx_hdr.bcast ? (chip_id <= rx_hdr.dst) : (rx_hdr.dst == chip_id));
    rx_on    = take;
    w_we     = take && rx_hdr.kind == FR_WEIGHT;
    i_we     = take && rx_hdr.kind == FR_INPUT;
    waddr    = WADDR_W'(rx_hdr.addr);
    wdata    = rx_data;
    cfg_load = take && rx_hdr.kind == FR_CONFIG;
    start    = take && rx_hdr.kind == FR_START && (11'(chip_id) < cfg.n_active);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= '0;
      words_rx <= '0;
    end else begin
      if (cfg_load) cfg <= chip_cfg_t'(rx_data[CFG_W-1:0]);
      if (take) words_rx <= words_rx + 1;
    end
  end
endmodule
