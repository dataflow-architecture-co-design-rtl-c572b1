// dist_scheduler: the memory chiplet's controller that runs one layer on the chiplet array.
//
// It follows the paper's timeline for a layer (t0.0 .. t0.3, then again for the next inputs):
//   CFG     broadcast the layer configuration (one frame);
//   W       t0.0: send the filters. KP-CP partitions the filters, so chiplet j gets its own
//           w_words words by unicast, one chiplet after the other; NP-CP and YP-XP replicate
//           the filters, so one broadcast of w_words words serves all chiplets;
//   then, for each of `rounds` rounds:
//   I       t0.1: send the inputs. KP-CP replicates them (one broadcast of i_words words);
//           NP-CP and YP-XP partition them (i_words words unicast to each chiplet in turn);
//   START   t0.2: broadcast a start frame, the chiplets compute;
//   COLLECT t0.3: wait until n_active*out_words output flits have reached the SRAM over
//           the wired NoP.
// Sizes in wireless words (WL_BYTES): channel-parallel w_words = n_filt*red_len*PES/WL_BYTES,
// output-stationary w_words = ceil(n_filt*red_len/WL_BYTES); i_words = n_vec*red_len*PES/WL_BYTES.
// SRAM layout: the weight region holds the chiplets' filter blocks back to back (KP-CP) or
// the one shared block; the input region holds the input blocks in the order they are sent
// (round-major, then chiplet). One SRAM word is read and one frame sent per cycle; the frame
// leaves one cycle after its read. The phase order and unicast/broadcast choice per strategy
// follow the paper. Replicated data and the start frame are multicast to chiplets
// 0..n_active-1 only, so receivers of chiplets idle in this layer stay off; the configuration
// frame goes to every chiplet. The region layout, frame format and counters are this design's
// choices.
module dist_scheduler
  import wienna_pkg::*;
#(
  parameter int unsigned PES = 64,
  parameter int unsigned AW  = 19   // SRAM word address bits
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  layer_desc_t           desc,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  sram_re,
  output logic [AW-1:0]         sram_raddr,
  input  logic [WL_BYTES*8-1:0] sram_rdata,
  output logic                  tx_valid,
  output wl_hdr_t               tx_hdr,
  output logic [WL_BYTES*8-1:0] tx_data,
  input  logic                  coll_fire,   // one output flit written to the SRAM
  output logic [1:0]            phase_out    // 0 idle/config, 1 distribute, 2 compute+collect
);
  typedef enum logic [2:0] {S_IDLE, S_CFG, S_W, S_I, S_START, S_COLLECT} state_e;

  localparam int unsigned ROWW = PES / WL_BYTES;     // wireless words per PE row
  localparam int unsigned CHUNKS = PES / NOP_BYTES;  // flits per output-stationary group

  state_e      state;
  layer_desc_t d;
  logic        cp, uc;
  logic [31:0] w_words, i_words, groups, out_words, expect_flits, n_words;
  logic [31:0] k, src, isrc, coll_cnt;
  logic [10:0] j;
  logic [15:0] round;
  logic        rd_q;
  wl_hdr_t     hdr_q;
  logic        ctl_valid;
  wl_hdr_t     ctl_hdr;
  logic [WL_BYTES*8-1:0] ctl_data;
  chip_cfg_t   cfg;

  always_comb begin
    cp        = (d.strategy != YP_XP);
    w_words   = cp ? 32'(d.n_filt) * 32'(d.red_len) * ROWW
                   : (32'(d.n_filt) * 32'(d.red_len) + WL_BYTES - 1) / WL_BYTES;
    i_words   = 32'(d.n_vec) * 32'(d.red_len) * ROWW;
    groups    = 32'(d.n_filt) * 32'(d.n_vec);
    out_words = cp ? (groups + NOP_BYTES - 1) / NOP_BYTES : groups * CHUNKS;
    expect_flits = out_words * 32'(d.n_active);
    uc        = (state == S_W) ? (d.strategy == KP_CP) : (d.strategy != KP_CP);
    n_words   = (state == S_W) ? w_words : i_words;
    cfg.xp_mode  = !cp;
    cfg.n_active = d.n_active;
    cfg.n_filt   = d.n_filt;
    cfg.n_vec    = d.n_vec;
    cfg.red_len  = d.red_len;
    cfg.shift    = d.shift;
    cfg.out_base = d.o_base;
    sram_re    = (state == S_W || state == S_I) && n_words != 0;
    sram_raddr = AW'((state == S_W) ? src : isrc);
    tx_valid   = rd_q || ctl_valid;
    tx_hdr     = rd_q ? hdr_q : ctl_hdr;
    tx_data    = rd_q ? sram_rdata : ctl_data;
    busy       = (state != S_IDLE);
    phase_out  = (state == S_W || state == S_I) ? 2'd1 :
                 (state == S_START || state == S_COLLECT) ? 2'd2 : 2'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      d         <= '0;
      k         <= '0;
      j         <= '0;
      src       <= '0;
      isrc      <= '0;
      round     <= '0;
      coll_cnt  <= '0;
      rd_q      <= 1'b0;
      hdr_q     <= '0;
      ctl_valid <= 1'b0;
      ctl_hdr   <= '0;
      ctl_data  <= '0;
      done      <= 1'b0;
    end else begin
      done      <= 1'b0;
      rd_q      <= sram_re;
      ctl_valid <= 1'b0;
      if (coll_fire) coll_cnt <= coll_cnt + 1;
      if (sram_re) begin
        hdr_q.kind  <= (state == S_W) ? FR_WEIGHT : FR_INPUT;
        hdr_q.bcast <= !uc;
        hdr_q.dst   <= uc ? 10'(j) : 10'(d.n_active - 11'd1);
        hdr_q.addr  <= 16'(k);
      end
      unique case (state)
        S_IDLE: if (start) begin
          d     <= desc;
          state <= S_CFG;
        end
        S_CFG: begin
          ctl_valid      <= 1'b1;
          ctl_hdr        <= '{kind: FR_CONFIG, bcast: 1'b1, dst: '1, addr: '0};
          ctl_data       <= '0;
          ctl_data[CFG_W-1:0] <= cfg;
          k     <= '0;
          j     <= '0;
          src   <= 32'(d.w_base);
          isrc  <= 32'(d.i_base);
          round <= '0;
          state <= S_W;
        end
        S_W, S_I: begin
          if (n_words == 0) begin
            state <= (state == S_W) ? S_I : S_START;
          end else begin
            if (state == S_W) src  <= src + 1;
            else              isrc <= isrc + 1;
            if (k != n_words - 1) begin
              k <= k + 1;
            end else begin
              k <= '0;
              if (uc && j != d.n_active - 11'd1) begin
                j <= j + 11'd1;
              end else begin
                j     <= '0;
                state <= (state == S_W) ? S_I : S_START;
              end
            end
          end
        end
        S_START: begin
          ctl_valid <= 1'b1;
          ctl_hdr   <= '{kind: FR_START, bcast: 1'b1, dst: 10'(d.n_active - 11'd1), addr: '0};
          ctl_data  <= '0;
          coll_cnt  <= '0;
          state     <= S_COLLECT;
        end
        S_COLLECT: if (coll_cnt == expect_flits) begin
          if (round == d.rounds - 16'd1 || d.rounds == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            round <= round + 16'd1;
            state <= S_I;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The wireless plane carries one frame per cycle: a scheduled SRAM word and a control frame
  // never meet.
  a_one_frame: assert property (@(posedge clk) disable iff (!rst_n) !(rd_q && ctl_valid));
endmodule
