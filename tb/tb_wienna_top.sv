// tb_wienna_top: end-to-end run of the whole accelerator on a reduced array (6 chiplets in a
// 3 x 2 mesh, 256 KiB global SRAM, 64-row local memories; PEs per chiplet and all bandwidths
// as in the full design).
// The testbench plays the HBM: it fills the weight and input regions of the global SRAM with
// random bytes through the HBM port, runs a sequence of layers that uses every partitioning
// strategy (KP-CP, NP-CP, YP-XP and KP-CP again, so the chiplets switch between
// channel-parallel and output-stationary operation twice), one of them on fewer chiplets than
// the array has, then reads every output back through the HBM port and compares it with a
// reference computed here from the SRAM contents and the documented data layout.
// It also counts the mechanisms the design relies on and fails if one never happened: unicast
// and broadcast wireless words (checked exactly against the counts each strategy implies),
// receivers ignoring frames not meant for them, multicasts that reach only the chiplets
// active in a layer (each multicast is checked to reach exactly its set), idle chiplets on a partial layer, collisions
// in the collection mesh (a chiplet's output waiting for its router), strategy switches.
// Rate: a broadcast word costs one cycle whatever the number of receivers, so the cycles from
// a layer's start to its first start frame must equal the number of words it distributes plus
// a fixed overhead.
module tb_wienna_top;
  import wienna_pkg::*;
  localparam int N = 6, MX = 3, PES = 64, ROWS = 64, SB = 262144;
  localparam int AW = $clog2(SB / WL_BYTES);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_desc_t           desc;
  logic                  start, busy, done;
  logic                  hbm_wr_valid, hbm_wr_ready, hbm_rd_valid, hbm_rd_ready, hbm_rd_data_valid;
  logic [AW-1:0]         hbm_wr_addr, hbm_rd_addr;
  logic [WL_BYTES*8-1:0] hbm_wr_data, hbm_rd_data;
  logic [31:0]           tx_unicast_words, tx_bcast_words;
  logic [N-1:0]          rx_on, chiplet_busy;
  logic                  sink_valid;
  logic [1:0]            phase;
  int checks = 0, failures = 0;

  wienna_top #(.N_CHIPLETS(N), .MESH_X(MX), .PES(PES), .ROWS(ROWS), .SRAM_BYTES(SB)) dut (.*);

  // ---------------- reference memory and layout ----------------
  logic [7:0] m [int];  // global SRAM bytes as the testbench wrote them

  function automatic logic [7:0] act(longint s, int sh);
    longint r;
    r = (s < 0) ? 0 : (s >>> sh);
    return (r > 127) ? 8'd127 : 8'(r);
  endfunction

  typedef struct { strategy_e s; int na, nf, nv, len, rounds, shamt, wb, ib, ob; } layer_t;

  function automatic int w_words(layer_t l);
    return (l.s != YP_XP) ? l.nf * l.len * (PES / WL_BYTES) : (l.nf * l.len + WL_BYTES - 1) / WL_BYTES;
  endfunction
  function automatic int i_words(layer_t l);
    return l.nv * l.len * (PES / WL_BYTES);
  endfunction
  function automatic int o_words(layer_t l);
    return (l.s != YP_XP) ? (l.nf * l.nv + NOP_BYTES - 1) / NOP_BYTES : l.nf * l.nv * (PES / NOP_BYTES);
  endfunction
  // SRAM byte of weight (f,t,lane p) for chiplet j; output-stationary weights are one byte per (f,t)
  function automatic int w_byte(layer_t l, int j, int f, int t, int p);
    if (l.s == YP_XP) return l.wb * WL_BYTES + f * l.len + t;
    return (l.wb + (l.s == KP_CP ? j * w_words(l) : 0)) * WL_BYTES + (f * l.len + t) * PES + p;
  endfunction
  function automatic int i_byte(layer_t l, int j, int r, int v, int t, int p);
    int blk;
    blk = (l.s == KP_CP) ? r : r * l.na + j;
    return (l.ib + blk * i_words(l)) * WL_BYTES + (v * l.len + t) * PES + p;
  endfunction

  // ---------------- HBM side ----------------
  task automatic hbm_write(int a);
    logic [WL_BYTES*8-1:0] d;
    for (int i = 0; i < WL_BYTES; i++) begin d[i*8 +: 8] = 8'($urandom); m[a*WL_BYTES+i] = d[i*8 +: 8]; end
    @(negedge clk);
    hbm_wr_valid = 1; hbm_wr_addr = AW'(a); hbm_wr_data = d;
    @(posedge clk);
    while (!hbm_wr_ready) @(posedge clk);
    @(negedge clk) hbm_wr_valid = 0;
  endtask

  task automatic hbm_read(int a, output logic [WL_BYTES*8-1:0] d);
    @(negedge clk);
    hbm_rd_valid = 1; hbm_rd_addr = AW'(a);
    @(negedge clk);
    hbm_rd_valid = 0;
    d = hbm_rd_data;
    checks++;
    if (!hbm_rd_data_valid) begin failures++; $display("FAIL HBM read not served"); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_ignored = 0, n_subset = 0, n_idle_layers = 0, n_mesh_wait = 0, n_switch = 0, rx_total = 0;
  logic [N-1:0] waiting;
  for (genvar c = 0; c < N; c++) begin : g_mon
    assign waiting[c] = dut.g_chip[c].u_chiplet.pk_valid && !dut.g_chip[c].u_chiplet.pk_ready;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.rx_valid && $countones(rx_on) < N) n_ignored++;
    if (dut.rx_valid) rx_total += $countones(rx_on);
    // a multicast reaches exactly receivers 0..dst; a multicast that leaves some out saves power
    if (dut.rx_valid && dut.rx_hdr.bcast) begin
      logic [N-1:0] exp_on;
      for (int c = 0; c < N; c++) exp_on[c] = (c <= int'(dut.rx_hdr.dst));
      checks++;
      if (rx_on != exp_on) begin failures++; $display("FAIL multicast to 0..%0d reached %b", dut.rx_hdr.dst, rx_on); end
      if (rx_on != '1) n_subset++;
    end
    if (|waiting) n_mesh_wait++;
  end

  // ---------------- one layer ----------------
  task automatic run_layer(layer_t l);
    int u0, b0, t0, t_first_start, exp_u, exp_b, ww, iw, ow;
    bit seen_start;
    ww = w_words(l); iw = i_words(l); ow = o_words(l);
    // fill the SRAM regions this layer reads
    for (int a = l.wb; a < l.wb + ww * (l.s == KP_CP ? l.na : 1); a++) hbm_write(a);
    for (int a = l.ib; a < l.ib + iw * (l.s == KP_CP ? l.rounds : l.rounds * l.na); a++) hbm_write(a);
    u0 = int'(tx_unicast_words); b0 = int'(tx_bcast_words);
    @(negedge clk);
    desc = '0;
    desc.strategy = l.s; desc.n_active = 11'(l.na); desc.n_filt = 16'(l.nf); desc.n_vec = 16'(l.nv);
    desc.red_len = 16'(l.len); desc.rounds = 16'(l.rounds); desc.shift = 5'(l.shamt);
    desc.w_base = 24'(l.wb); desc.i_base = 24'(l.ib); desc.o_base = 24'(l.ob);
    start = 1;
    t0 = int'($time / 10);
    @(negedge clk) start = 0;
    seen_start = 0; t_first_start = 0;
    while (!done) begin
      @(posedge clk);
      if (!seen_start && dut.tx_valid && dut.tx_hdr.kind == FR_START) begin
        seen_start = 1; t_first_start = int'($time / 10);
      end
      for (int c = l.na; c < N; c++) if (chiplet_busy[c]) begin
        failures++; $display("FAIL idle chiplet %0d started", c);
      end
    end
    if (l.na < N) n_idle_layers++;
    // wireless word counts implied by the strategy
    exp_u = (l.s == KP_CP) ? ww * l.na : iw * l.na * l.rounds;
    exp_b = 1 + l.rounds + ((l.s == KP_CP) ? iw * l.rounds : ww);
    checks++;
    if (int'(tx_unicast_words) - u0 != exp_u || int'(tx_bcast_words) - b0 != exp_b) begin
      failures++;
      $display("FAIL words unicast %0d/%0d broadcast %0d/%0d", int'(tx_unicast_words) - u0, exp_u,
               int'(tx_bcast_words) - b0, exp_b);
    end
    // rate: idle->config (1), config frame (1), one cycle per word, tx register (1), start frame (1)
    checks++;
    if (t_first_start - t0 != 4 + (l.s == KP_CP ? ww * l.na + iw : ww + iw * l.na)) begin
      failures++; $display("FAIL distribution took %0d cycles for %0d words", t_first_start - t0,
                           (l.s == KP_CP ? ww * l.na + iw : ww + iw * l.na));
    end
    // outputs
    for (int r = 0; r < l.rounds; r++)
      for (int j = 0; j < l.na; j++) begin
        logic [7:0] exp_b8 [$];
        for (int v = 0; v < l.nv; v++)
          for (int f = 0; f < l.nf; f++)
            if (l.s != YP_XP) begin
              longint s; s = 0;
              for (int t = 0; t < l.len; t++)
                for (int p = 0; p < PES; p++)
                  s += longint'($signed(m[w_byte(l, j, f, t, p)])) * longint'($signed(m[i_byte(l, j, r, v, t, p)]));
              exp_b8.push_back(act(s, l.shamt));
            end else
              for (int p = 0; p < PES; p++) begin
                longint s; s = 0;
                for (int t = 0; t < l.len; t++)
                  s += longint'($signed(m[w_byte(l, j, f, t, 0)])) * longint'($signed(m[i_byte(l, j, r, v, t, p)]));
                exp_b8.push_back(act(s, l.shamt));
              end
        for (int k = 0; k < ow; k++) begin
          int fa;
          logic [WL_BYTES*8-1:0] d;
          fa = l.ob + (r * l.na + j) * ow + k;   // flit address, NOP_BYTES words
          hbm_read(fa / (WL_BYTES / NOP_BYTES), d);
          for (int i = 0; i < NOP_BYTES; i++) begin
            logic [7:0] e, g;
            e = (k * NOP_BYTES + i < exp_b8.size()) ? exp_b8[k*NOP_BYTES+i] : 8'd0;
            g = d[((fa % (WL_BYTES / NOP_BYTES)) * NOP_BYTES + i) * 8 +: 8];
            checks++;
            if (g !== e) begin
              failures++;
              if (failures < 20) $display("FAIL layer %0d chiplet %0d round %0d byte %0d: %0d exp %0d",
                                          l.s, j, r, k * NOP_BYTES + i, g, e);
            end
          end
        end
      end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_t ls[$];
    strategy_e prev;
    desc = '0; start = 0; hbm_wr_valid = 0; hbm_wr_addr = '0; hbm_wr_data = '0;
    hbm_rd_valid = 0; hbm_rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    //          strategy na nf nv len rounds shamt wb    ib     ob
    ls.push_back('{KP_CP, N,  3, 2,  4, 2, 6,    0, 1000,  8000});
    ls.push_back('{NP_CP, N-1, 2, 3,  3, 2, 6,  200, 1200,  9000});
    ls.push_back('{YP_XP, N,  2, 2, 20, 2, 7,  400, 1500, 10000});
    ls.push_back('{KP_CP, N,  4, 4,  2, 1, 5,  500, 2600, 11000});
    prev = ls[0].s;
    foreach (ls[i]) begin
      if ((ls[i].s == YP_XP) != (prev == YP_XP)) n_switch++;
      prev = ls[i].s;
      run_layer(ls[i]);
    end
    $display("mechanisms: unicast_words=%0d broadcast_words=%0d ignored_frames=%0d subset_multicasts=%0d idle_layers=%0d mesh_waits=%0d mode_switches=%0d multicast_factor=%0.2f",
             tx_unicast_words, tx_bcast_words, n_ignored, n_subset, n_idle_layers, n_mesh_wait, n_switch,
             real'(rx_total) / real'(tx_unicast_words + tx_bcast_words));
    checks++; if (tx_unicast_words == 0) begin failures++; $display("FAIL no unicast"); end
    checks++; if (tx_bcast_words == 0)   begin failures++; $display("FAIL no broadcast"); end
    checks++; if (n_ignored == 0)        begin failures++; $display("FAIL no ignored frame"); end
    checks++; if (n_subset == 0)         begin failures++; $display("FAIL no multicast to a subset"); end
    checks++; if (n_idle_layers == 0)    begin failures++; $display("FAIL no partial layer"); end
    checks++; if (n_mesh_wait == 0)      begin failures++; $display("FAIL no mesh contention"); end
    checks++; if (n_switch < 2)          begin failures++; $display("FAIL no mode switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
