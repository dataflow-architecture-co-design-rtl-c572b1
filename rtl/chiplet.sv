// chiplet: one accelerator chiplet of the array.
//
// Data arrives over the wireless plane: the receiver (wireless_rx) writes weight and input
// words into the two local memory banks and latches the layer configuration. A start frame
// starts one round: chiplet_ctrl streams rows of the local memory through the on-chip network
// (onchip_net) into the PES processing elements, which multiply-accumulate. Finished sums go
// either through the adder tree and one activation unit (channel-parallel mode, NVDLA-like,
// one output per group) or straight from each PE's own activation unit (output-stationary
// mode, Shidiannao-like, PES outputs per group). out_packer packs them into flits, and the
// chiplet's mesh router (nop_router) sends them, and forwards its neighbours' flits, toward the
// global SRAM over the wired plane.
// The chiplet's outputs of round r go to SRAM words out_base + (r*n_active + chip_id)*out_words
// onward, where out_words is ceil(n_filt*n_vec/NOP_BYTES) in channel-parallel mode and
// n_filt*n_vec*PES/NOP_BYTES in output-stationary mode. The round counter restarts with every
// configuration frame.
// The paper gives the chiplet's parts (wireless RX, local memory, on-chip network, PEs,
// activation functions, collection router) and the two chiplet styles; how one PE array serves
// both styles, and all widths and formats, are this design's choices.
module chiplet
  import wienna_pkg::*;
#(
  parameter int unsigned PES  = 64,
  parameter int unsigned ROWS = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [9:0]            chip_id,
  input  logic                  at_col0,
  // wireless plane
  input  logic                  rx_valid,
  input  wl_hdr_t               rx_hdr,
  input  logic [WL_BYTES*8-1:0] rx_data,
  // wired collection plane
  input  logic                  e_valid,
  input  flit_t                 e_flit,
  output logic                  e_ready,
  input  logic                  s_valid,
  input  flit_t                 s_flit,
  output logic                  s_ready,
  output logic                  w_valid,
  output flit_t                 w_flit,
  input  logic                  w_ready,
  output logic                  n_valid,
  output flit_t                 n_flit,
  input  logic                  n_ready,
  // status
  output logic                  busy,
  output logic                  rx_on
);
  localparam int unsigned WADDR_W = $clog2(ROWS * PES / WL_BYTES);
  localparam int unsigned RW      = $clog2(ROWS);
  localparam int unsigned PW      = $clog2(PES);
  localparam int unsigned CHUNKS  = PES / NOP_BYTES;

  // ---------------- wireless receiver and local memory ----------------
  chip_cfg_t             cfg;
  logic                  cfg_load, start, w_we, i_we;
  logic [WADDR_W-1:0]    waddr;
  logic [WL_BYTES*8-1:0] wdata;
  logic [31:0]           words_rx;

  wireless_rx #(.WADDR_W(WADDR_W)) u_rx (
    .clk, .rst_n, .chip_id, .rx_valid, .rx_hdr, .rx_data, .rx_on,
    .w_we, .i_we, .waddr, .wdata, .cfg, .cfg_load, .start, .words_rx
  );

  logic          w_re, i_re;
  logic [RW-1:0] w_raddr, i_raddr;
  logic [PES*8-1:0] w_row, i_row;

  local_memory #(.ROWS(ROWS), .ROW_BYTES(PES), .WR_BYTES(WL_BYTES)) u_wmem (
    .clk, .we(w_we), .waddr, .wdata, .re(w_re), .raddr(w_raddr), .rdata(w_row));
  local_memory #(.ROWS(ROWS), .ROW_BYTES(PES), .WR_BYTES(WL_BYTES)) u_imem (
    .clk, .we(i_we), .waddr, .wdata, .re(i_re), .raddr(i_raddr), .rdata(i_row));

  // ---------------- dataflow sequencing and on-chip network ----------------
  logic          pes_ready, op_valid, op_last, ctrl_busy;
  logic [PW-1:0] w_sel;

  chiplet_ctrl #(.PES(PES), .ROWS(ROWS)) u_ctrl (
    .clk, .rst_n, .cfg, .start, .pes_ready, .w_re, .w_raddr, .i_re, .i_raddr,
    .w_sel_q(w_sel), .op_valid, .op_last, .busy(ctrl_busy));

  logic [7:0]         pe_w [PES];
  logic [7:0]         pe_in[PES];
  logic signed [31:0] psum [PES];
  logic signed [31:0] total;

  onchip_net #(.PES(PES), .DATA_W(8), .ACC_W(32)) u_noc (
    .xp_mode(cfg.xp_mode), .w_row, .i_row, .w_sel, .pe_w, .pe_in, .psum, .total);

  // ---------------- PE array ----------------
  logic [PES-1:0]   pe_op_ready, pe_out_valid;
  logic [PES*8-1:0] pe_act;
  logic             grp_valid, grp_ready;

  for (genvar p = 0; p < PES; p++) begin : g_pe
    pe #(.DATA_W(8), .ACC_W(32), .DEPTH(4)) u_pe (
      .clk, .rst_n,
      .op_valid, .op_in(pe_in[p]), .op_w(pe_w[p]), .op_last, .op_ready(pe_op_ready[p]),
      .shift(cfg.shift),
      .out_valid(pe_out_valid[p]), .out_sum(psum[p]), .out_act(pe_act[p*8 +: 8]),
      .out_ready(grp_valid && grp_ready));
  end

  assign pes_ready = &pe_op_ready;
  assign grp_valid = &pe_out_valid;

  // Channel-parallel mode: one activation after the adder tree.
  logic [7:0]       tree_act;
  logic [PES*8-1:0] grp_data;

  act_unit #(.ACC_W(32), .DATA_W(8)) u_tree_act (.sum(total), .shift(cfg.shift), .act(tree_act));

  assign grp_data = cfg.xp_mode ? pe_act : {{(PES*8-8){1'b0}}, tree_act};

  // ---------------- output packing and collection router ----------------
  logic [15:0]       round;
  logic [31:0]       n_groups, out_words;
  logic [FLIT_A-1:0] base;
  logic              pk_valid, pk_ready, pk_busy, pk_done;
  flit_t             pk_flit;

  always_comb begin
    n_groups  = 32'(cfg.n_filt) * 32'(cfg.n_vec);
    out_words = cfg.xp_mode ? n_groups * CHUNKS : (n_groups + NOP_BYTES - 1) / NOP_BYTES;
    base      = FLIT_A'(32'(cfg.out_base) +
                        (32'(round) * 32'(cfg.n_active) + 32'(chip_id)) * out_words);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        round <= '0;
    else if (cfg_load) round <= '0;
    else if (start)    round <= round + 16'd1;
  end

  out_packer #(.PES(PES)) u_pack (
    .clk, .rst_n, .start, .base, .n_groups, .xp_mode(cfg.xp_mode),
    .grp_valid, .grp_data, .grp_ready,
    .flit_valid(pk_valid), .flit(pk_flit), .flit_ready(pk_ready),
    .busy(pk_busy), .done(pk_done));

  logic  r_in_valid [3];
  flit_t r_in_flit  [3];
  logic  r_in_ready [3];

  always_comb begin
    r_in_valid[0] = pk_valid;  r_in_flit[0] = pk_flit;
    r_in_valid[1] = e_valid;   r_in_flit[1] = e_flit;
    r_in_valid[2] = s_valid;   r_in_flit[2] = s_flit;
    pk_ready = r_in_ready[0];
    e_ready  = r_in_ready[1];
    s_ready  = r_in_ready[2];
  end

  nop_router #(.DEPTH(2)) u_router (
    .clk, .rst_n, .at_col0,
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_ready(r_in_ready),
    .w_valid, .w_flit, .w_ready, .n_valid, .n_flit, .n_ready);

  assign busy = ctrl_busy || pk_busy;
endmodule
