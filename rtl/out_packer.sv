// out_packer: turns a chiplet's finished outputs into flits of the wired collection NoP.
//
// A round starts with `start`, which loads the SRAM address of this chiplet's first output
// word (base, in NOP_BYTES words) and the number of output groups the round will produce.
// Channel-parallel mode: each group is one output byte (grp_data[7:0]); bytes are packed in
// order into a NOP_BYTES flit, which is sent when full or when the round's last byte arrives
// (zero padded). Output-stationary mode: each group is PES bytes, one per PE, sent as
// PES/NOP_BYTES consecutive flits. Flit addresses count up from base. `done` pulses once all
// flits of the round have left. Outputs are written back over the wired plane, as in the paper;
// the flit format and the packing order are this design's choices.
// Handshake: grp_valid/grp_ready and flit_valid/flit_ready, a transfer on both high.
module out_packer
  import wienna_pkg::*;
#(
  parameter int unsigned PES = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [FLIT_A-1:0]   base,
  input  logic [31:0]         n_groups,
  input  logic                xp_mode,
  input  logic                grp_valid,
  input  logic [PES*8-1:0]    grp_data,
  output logic                grp_ready,
  output logic                flit_valid,
  output flit_t               flit,
  input  logic                flit_ready,
  output logic                busy,
  output logic                done
);
  localparam int unsigned CHUNKS = PES / NOP_BYTES;
  localparam int unsigned CW     = (CHUNKS > 1) ? $clog2(CHUNKS + 1) : 1;
  localparam int unsigned FW     = $clog2(NOP_BYTES);

  logic [31:0]            groups_left;
  logic [FLIT_A-1:0]      addr;
  logic [PES*8-1:0]       hold;
  logic [CW-1:0]          hold_cnt;
  logic [CW-1:0]          hold_idx;
  logic [NOP_BYTES*8-1:0] pack, pack_next;
  logic [FW-1:0]          fill;
  logic                   can_emit, accept;

  always_comb begin
    can_emit  = !flit_valid || flit_ready;
    grp_ready = busy && (groups_left != 0) && (xp_mode ? (hold_cnt == 0) : can_emit);
    accept    = grp_valid && grp_ready;
    pack_next = pack;
    pack_next[fill*8 +: 8] = grp_data[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      groups_left <= '0;
      addr        <= '0;
      hold        <= '0;
      hold_cnt    <= '0;
      hold_idx    <= '0;
      pack        <= '0;
      fill        <= '0;
      flit_valid  <= 1'b0;
      flit        <= '0;
    end else begin
      done <= 1'b0;
      if (flit_valid && flit_ready) flit_valid <= 1'b0;
      if (start && !busy) begin
        busy        <= 1'b1;
        groups_left <= n_groups;
        addr        <= base;
        hold_cnt    <= '0;
        pack        <= '0;
        fill        <= '0;
      end else if (busy) begin
        if (xp_mode) begin
          if (accept) begin
            hold        <= grp_data;
            hold_cnt    <= CW'(CHUNKS);
            hold_idx    <= '0;
            groups_left <= groups_left - 1;
          end else if (hold_cnt != 0 && can_emit) begin
            flit_valid <= 1'b1;
            flit.addr  <= addr;
            flit.data  <= hold[hold_idx*NOP_BYTES*8 +: NOP_BYTES*8];
            addr       <= addr + 1'b1;
            hold_cnt   <= hold_cnt - 1'b1;
            hold_idx   <= hold_idx + 1'b1;
          end
        end else if (accept) begin
          groups_left <= groups_left - 1;
          if (fill == FW'(NOP_BYTES - 1) || groups_left == 1) begin
            flit_valid <= 1'b1;
            flit.addr  <= addr;
            flit.data  <= pack_next;
            addr       <= addr + 1'b1;
            pack       <= '0;
            fill       <= '0;
          end else begin
            pack <= pack_next;
            fill <= fill + 1'b1;
          end
        end
        if (groups_left == 0 && hold_cnt == 0 && !flit_valid) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_flit_stable: assert property (@(posedge clk) disable iff (!rst_n)
    flit_valid && !flit_ready |=> flit_valid && $stable(flit));
endmodule
