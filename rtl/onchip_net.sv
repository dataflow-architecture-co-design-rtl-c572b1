// onchip_net: the chiplet's on-chip network between the local memory and the PEs.
//
// Distribution: in channel-parallel mode (xp_mode=0, used by KP-CP and NP-CP, NVDLA-like)
// PE p receives byte p of the weight row and byte p of the input row, so the 64 PEs share the
// channel (reduction) dimension. In output-stationary mode (xp_mode=1, YP-XP,
// Shidiannao-like) one weight byte, selected by w_sel, is broadcast to every PE and PE p gets
// byte p of the input row, so each PE owns one output column.
// Reduction: in channel-parallel mode the per-PE partial sums are added by a binary adder tree
// into one output. The paper names the on-chip network and the two chiplet styles; this mapping
// of them onto one PE array is this design's own. Purely combinational.
module onchip_net #(
  parameter int unsigned PES    = 64,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                    xp_mode,
  input  logic [PES*DATA_W-1:0]   w_row,
  input  logic [PES*DATA_W-1:0]   i_row,
  input  logic [$clog2(PES)-1:0]  w_sel,
  output logic [DATA_W-1:0]       pe_w  [PES],
  output logic [DATA_W-1:0]       pe_in [PES],
  input  logic signed [ACC_W-1:0] psum  [PES],
  output logic signed [ACC_W-1:0] total
);
  localparam int unsigned LEVELS = $clog2(PES);

  always_comb begin
    for (int p = 0; p < PES; p++) begin
      pe_in[p] = i_row[p*DATA_W +: DATA_W];
      pe_w[p]  = xp_mode ? w_row[w_sel*DATA_W +: DATA_W] : w_row[p*DATA_W +: DATA_W];
    end
  end

  // Adder tree: level l has PES >> l nodes.
  logic signed [ACC_W-1:0] node [LEVELS+1][PES];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int n = 0; n < PES; n++) node[l][n] = '0;
    for (int n = 0; n < PES; n++) node[0][n] = psum[n];
    for (int l = 1; l <= LEVELS; l++)
      for (int n = 0; n < (PES >> l); n++)
        node[l][n] = node[l-1][2*n] + node[l-1][2*n+1];
    total = node[LEVELS][0];
  end
endmodule
