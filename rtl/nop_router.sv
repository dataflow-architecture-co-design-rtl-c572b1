// nop_router: router of the wired mesh Network-on-Package that collects outputs.
//
// In the paper the interposer mesh is used only for collection, so every flit travels to the
// global SRAM. The SRAM sits at the north-west corner, past node (0,0). With dimension-order
// (X then Y) routing toward it, a flit moves west until column 0 and then north, so a router
// takes flits from its own chiplet (port 0), from its east neighbour (port 1) and, in column 0,
// from its south neighbour (port 2), and sends them all to one output: west when not in
// column 0 (at_col0=0), north when in column 0 (the north output of node (0,0) feeds the SRAM).
// Each input has a DEPTH-entry queue; a round-robin arbiter picks one head per cycle. A flit
// spends one cycle in a router when the way is free. Single-flit packets, valid/ready links.
// Mesh topology and use for collection follow the paper; the queue depth, arbitration and the
// collection-only port set are this design's choices.
module nop_router
  import wienna_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  at_col0,
  input  logic  in_valid [3],  // 0 local, 1 east, 2 south
  input  flit_t in_flit  [3],
  output logic  in_ready [3],
  output logic  w_valid,
  output flit_t w_flit,
  input  logic  w_ready,
  output logic  n_valid,
  output flit_t n_flit,
  input  logic  n_ready
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t         q     [3][DEPTH];
  logic [PW-1:0] wr_ptr[3], rd_ptr[3];
  logic [PW:0]   count [3];
  logic [1:0]    rr;        // port with priority this cycle
  logic [1:0]    sel;
  logic          any, out_ready, pop;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 0; k < 3; k++) begin
      int p;
      p = (int'(rr) + k) % 3;
      if (!any && count[p] != 0) begin
        any = 1'b1;
        sel = 2'(p);
      end
    end
    out_ready = at_col0 ? n_ready : w_ready;
    pop       = any && out_ready;
    w_valid   = any && !at_col0;
    n_valid   = any && at_col0;
    w_flit    = q[sel][rd_ptr[sel]];
    n_flit    = q[sel][rd_ptr[sel]];
    for (int p = 0; p < 3; p++) in_ready[p] = (count[p] < (PW+1)'(DEPTH));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int p = 0; p < 3; p++) begin
        wr_ptr[p] <= '0;
        rd_ptr[p] <= '0;
        count[p]  <= '0;
      end
    end else begin
      for (int p = 0; p < 3; p++) begin
        logic psh, pp;
        psh = in_valid[p] && in_ready[p];
        pp  = pop && (sel == 2'(p));
        if (psh) begin
          q[p][wr_ptr[p]] <= in_flit[p];
          wr_ptr[p] <= (wr_ptr[p] == PW'(DEPTH - 1)) ? '0 : wr_ptr[p] + 1'b1;
        end
        if (pp) rd_ptr[p] <= (rd_ptr[p] == PW'(DEPTH - 1)) ? '0 : rd_ptr[p] + 1'b1;
        count[p] <= count[p] + (PW+1)'(psh) - (PW+1)'(pp);
      end
      if (pop) rr <= (sel == 2'd2) ? 2'd0 : sel + 2'd1;
    end
  end
endmodule
