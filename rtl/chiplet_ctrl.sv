// chiplet_ctrl: sequencer of the intra-chiplet dataflow.
//
// On `start` it walks, for every input vector v and every filter f of the round, the
// reduction index t = 0 .. red_len-1, reading one weight row and one input row of the local
// memory per cycle and handing them to the PE array through the on-chip network:
//   channel-parallel (KP-CP, NP-CP): weight row f*red_len+t, input row v*red_len+t, each PE
//     takes its own byte (the channel dimension is spread over the PEs);
//   output-stationary (YP-XP): weight element e = f*red_len+t, i.e. row e/PES byte e%PES,
//     is broadcast; input row v*red_len+t gives each PE the input of its output column.
// The operation with t = red_len-1 is marked last, which closes one output group (one sum in
// channel-parallel mode, PES sums in output-stationary mode). Memory reads are synchronous,
// so op_valid/op_last/w_sel_q follow the read by one cycle. A read is only issued while every
// PE has room (pes_ready), so back-pressure from the output path stalls the loop.
// Loop order (v outer, f, t inner) and the row layout of the local memory are this design's
// choices; the paper gives only the two chiplet styles (NVDLA-like, Shidiannao-like).
module chiplet_ctrl
  import wienna_pkg::*;
#(
  parameter int unsigned PES  = 64,
  parameter int unsigned ROWS = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  chip_cfg_t               cfg,
  input  logic                    start,
  input  logic                    pes_ready,
  output logic                    w_re,
  output logic [$clog2(ROWS)-1:0] w_raddr,
  output logic                    i_re,
  output logic [$clog2(ROWS)-1:0] i_raddr,
  output logic [$clog2(PES)-1:0]  w_sel_q,   // broadcast weight byte, aligned with op_valid
  output logic                    op_valid,  // memory data is an operation for the PEs
  output logic                    op_last,
  output logic                    busy       // still issuing operations
);
  localparam int unsigned PW = $clog2(PES);
  localparam int unsigned RW = $clog2(ROWS);

  logic [15:0] v, f, t;
  logic [31:0] wbase, ibase;  // f*red_len and v*red_len
  logic [31:0] w_elem, i_row;
  logic        issue, is_last;

  always_comb begin
    w_elem  = wbase + 32'(t);
    i_row   = ibase + 32'(t);
    issue   = busy && pes_ready;
    is_last = (t == cfg.red_len - 16'd1);
    w_re    = issue;
    i_re    = issue;
    w_raddr = cfg.xp_mode ? RW'(w_elem >> PW) : RW'(w_elem);
    i_raddr = RW'(i_row);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      v        <= '0;
      f        <= '0;
      t        <= '0;
      wbase    <= '0;
      ibase    <= '0;
      op_valid <= 1'b0;
      op_last  <= 1'b0;
      w_sel_q  <= '0;
    end else begin
      op_valid <= issue;
      op_last  <= issue && is_last;
      w_sel_q  <= PW'(w_elem);
      if (start && !busy) begin
        busy  <= (cfg.n_filt != 0) && (cfg.n_vec != 0) && (cfg.red_len != 0);
        v     <= '0;
        f     <= '0;
        t     <= '0;
        wbase <= '0;
        ibase <= '0;
      end else if (issue) begin
        if (!is_last) begin
          t <= t + 16'd1;
        end else begin
          t <= '0;
          if (f != cfg.n_filt - 16'd1) begin
            f     <= f + 16'd1;
            wbase <= wbase + 32'(cfg.red_len);
          end else begin
            f     <= '0;
            wbase <= '0;
            ibase <= ibase + 32'(cfg.red_len);
            if (v != cfg.n_vec - 16'd1) v <= v + 16'd1;
            else                        busy <= 1'b0;
          end
        end
      end
    end
  end
endmodule
