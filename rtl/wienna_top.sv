// wienna_top: the whole wireless-NoP 2.5D DNN accelerator.
//
// The memory chiplet holds the global SRAM, the distribution scheduler and the single
// wireless transmitter. N_CHIPLETS accelerator chiplets, each with PES processing elements,
// sit in a MESH_X-wide grid. Distribution uses only the wireless plane: every frame the
// transmitter sends reaches all receivers in one hop, and each receiver keeps what is
// unicast to it or multicast to a set (ids 0..dst) that includes it. Collection uses only the
// wired mesh: chiplet (x,y), id y*MESH_X+x, sends flits west to column 0 and then north;
// the north output of chiplet (0,0) writes into the SRAM, half a wireless word per cycle.
// The HBM that fills and drains the global SRAM is not modelled: its port is brought out
// (hbm_wr_* writes one SRAM word, hbm_rd_* reads one, with data one cycle later). HBM writes
// yield to collection writes, and HBM reads are only served while no layer runs.
// A layer is started by pulsing `start` with its descriptor on `desc`; `done` pulses when all
// its outputs are in the SRAM. Between layers the descriptor's strategy may change, which
// switches every chiplet between channel-parallel and output-stationary operation.
module wienna_top
  import wienna_pkg::*;
#(
  parameter int unsigned N_CHIPLETS = wienna_pkg::NUM_CHIPLETS,
  parameter int unsigned MESH_X     = wienna_pkg::MESH_COLS,
  parameter int unsigned PES        = wienna_pkg::PES_PER_CHIPLET,
  parameter int unsigned ROWS       = wienna_pkg::LMEM_ROWS,
  parameter int unsigned SRAM_BYTES = wienna_pkg::GSRAM_BYTES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // layer control
  input  layer_desc_t           desc,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // HBM side of the global SRAM
  input  logic                  hbm_wr_valid,
  input  logic [$clog2(SRAM_BYTES/WL_BYTES)-1:0] hbm_wr_addr,
  input  logic [WL_BYTES*8-1:0] hbm_wr_data,
  output logic                  hbm_wr_ready,
  input  logic                  hbm_rd_valid,
  input  logic [$clog2(SRAM_BYTES/WL_BYTES)-1:0] hbm_rd_addr,
  output logic                  hbm_rd_ready,
  output logic [WL_BYTES*8-1:0] hbm_rd_data,
  output logic                  hbm_rd_data_valid,
  // activity, for performance and energy accounting
  output logic [31:0]           tx_unicast_words,
  output logic [31:0]           tx_bcast_words,
  output logic [N_CHIPLETS-1:0] rx_on,          // receivers taking the current frame
  output logic [N_CHIPLETS-1:0] chiplet_busy,
  output logic                  sink_valid,     // an output flit enters the SRAM
  output logic [1:0]            phase
);
  localparam int unsigned AW     = $clog2(SRAM_BYTES / WL_BYTES);

  // ---------------- memory chiplet ----------------
  logic                  s_re, s_we;
  logic [AW-1:0]         s_raddr, s_waddr;
  logic [WL_BYTES*8-1:0] s_rdata, s_wdata;
  logic [WL_BYTES-1:0]   s_wstrb;
  logic                  sch_re;
  logic [AW-1:0]         sch_raddr;
  logic                  sch_tx_valid;
  wl_hdr_t               sch_tx_hdr;
  logic [WL_BYTES*8-1:0] sch_tx_data;
  flit_t                 sink_flit;

  global_sram #(.BYTES(SRAM_BYTES), .WORD_BYTES(WL_BYTES)) u_sram (
    .clk, .re(s_re), .raddr(s_raddr), .rdata(s_rdata),
    .we(s_we), .waddr(s_waddr), .wstrb(s_wstrb), .wdata(s_wdata));

  dist_scheduler #(.PES(PES), .AW(AW)) u_sched (
    .clk, .rst_n, .desc, .start, .busy, .done,
    .sram_re(sch_re), .sram_raddr(sch_raddr), .sram_rdata(s_rdata),
    .tx_valid(sch_tx_valid), .tx_hdr(sch_tx_hdr), .tx_data(sch_tx_data),
    .coll_fire(sink_valid), .phase_out(phase));

  // SRAM port sharing: the scheduler owns the read port while a layer runs, the collection NoP
  // has the write port whenever a flit arrives.
  localparam int unsigned HALVES = WL_BYTES / NOP_BYTES;
  localparam int unsigned HW     = (HALVES > 1) ? $clog2(HALVES) : 1;

  always_comb begin
    hbm_rd_ready = !busy;
    s_re         = busy ? sch_re : hbm_rd_valid;
    s_raddr      = busy ? sch_raddr : hbm_rd_addr;
    hbm_wr_ready = !sink_valid;
    s_we         = sink_valid || hbm_wr_valid;
    if (sink_valid) begin
      s_waddr = AW'(sink_flit.addr / HALVES);
      s_wdata = {HALVES{sink_flit.data}};
      s_wstrb = '0;
      s_wstrb[HW'(sink_flit.addr % HALVES)*NOP_BYTES +: NOP_BYTES] = '1;
    end else begin
      s_waddr = hbm_wr_addr;
      s_wdata = hbm_wr_data;
      s_wstrb = '1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hbm_rd_data_valid <= 1'b0;
    else        hbm_rd_data_valid <= hbm_rd_valid && !busy;
  end
  assign hbm_rd_data = s_rdata;

  // ---------------- wireless plane ----------------
  logic                  tx_valid, rx_valid;
  wl_hdr_t               tx_hdr, rx_hdr;
  logic [WL_BYTES*8-1:0] tx_data, rx_data;

  wireless_tx u_tx (
    .clk, .rst_n, .req_valid(sch_tx_valid), .req_hdr(sch_tx_hdr), .req_data(sch_tx_data),
    .tx_valid, .tx_hdr, .tx_data, .n_unicast(tx_unicast_words), .n_bcast(tx_bcast_words));

  wireless_channel u_channel (
    .clk, .tx_valid, .tx_hdr, .tx_data, .rx_valid, .rx_hdr, .rx_data);

  // ---------------- chiplet array and wired collection mesh ----------------
  logic  w_valid [N_CHIPLETS];
  flit_t w_flit  [N_CHIPLETS];
  logic  w_ready [N_CHIPLETS];
  logic  n_valid [N_CHIPLETS];
  flit_t n_flit  [N_CHIPLETS];
  logic  n_ready [N_CHIPLETS];
  logic  e_valid [N_CHIPLETS];
  flit_t e_flit  [N_CHIPLETS];
  logic  e_ready [N_CHIPLETS];
  logic  s_valid [N_CHIPLETS];
  flit_t s_flit  [N_CHIPLETS];
  logic  s_ready [N_CHIPLETS];

  for (genvar c = 0; c < N_CHIPLETS; c++) begin : g_chip
    localparam int unsigned X = c % MESH_X;

    chiplet #(.PES(PES), .ROWS(ROWS)) u_chiplet (
      .clk, .rst_n, .chip_id(10'(c)), .at_col0(X == 0),
      .rx_valid, .rx_hdr, .rx_data,
      .e_valid(e_valid[c]), .e_flit(e_flit[c]), .e_ready(e_ready[c]),
      .s_valid(s_valid[c]), .s_flit(s_flit[c]), .s_ready(s_ready[c]),
      .w_valid(w_valid[c]), .w_flit(w_flit[c]), .w_ready(w_ready[c]),
      .n_valid(n_valid[c]), .n_flit(n_flit[c]), .n_ready(n_ready[c]),
      .busy(chiplet_busy[c]), .rx_on(rx_on[c]));

    // East input: west output of the chiplet to the east, if any.
    if (X + 1 < MESH_X && c + 1 < N_CHIPLETS) begin : g_east
      assign e_valid[c]   = w_valid[c+1];
      assign e_flit[c]    = w_flit[c+1];
      assign w_ready[c+1] = e_ready[c];
    end else begin : g_no_east
      assign e_valid[c] = 1'b0;
      assign e_flit[c]  = '0;
    end

    // South input: north output of the chiplet below, used in column 0 only.
    if (X == 0 && c + MESH_X < N_CHIPLETS) begin : g_south
      assign s_valid[c]        = n_valid[c+MESH_X];
      assign s_flit[c]         = n_flit[c+MESH_X];
      assign n_ready[c+MESH_X] = s_ready[c];
    end else begin : g_no_south
      assign s_valid[c] = 1'b0;
      assign s_flit[c]  = '0;
    end

    // Outputs that lead nowhere: west of column 0, north of columns > 0 (never used by the
    // routing), and north of row 0 except at (0,0), which is the SRAM sink.
    if (X == 0) begin : g_w_edge
      assign w_ready[c] = 1'b1;
    end
    if (X != 0) begin : g_n_unused
      assign n_ready[c] = 1'b1;
    end
  end

  assign n_ready[0]  = 1'b1;  // the SRAM takes a flit every cycle
  assign sink_valid  = n_valid[0];
  assign sink_flit   = n_flit[0];

  // Collection flits never leave through an edge that leads nowhere.
  for (genvar c = 0; c < N_CHIPLETS; c++) begin : g_chk
    if (c % MESH_X == 0) begin : g_c0
      a_no_west: assert property (@(posedge clk) disable iff (!rst_n) !w_valid[c]);
    end else begin : g_cx
      a_no_north: assert property (@(posedge clk) disable iff (!rst_n) !n_valid[c]);
    end
  end
endmodule
