// tb_chiplet: one chiplet driven as the memory chiplet would drive it. Per layer it receives a
// broadcast configuration, weight and input words (some unicasts to other chiplets mixed in,
// which it must ignore), then a start frame per round; its output flits are compared with a
// reference computed here from the same bytes: channel-parallel sums over all PEs' lanes, or
// output-stationary sums per PE column, each through ReLU, shift and saturation. Meanwhile
// neighbour flits are offered on the east and south inputs and the north output is randomly
// stalled; the forwarded flits must all come out unchanged. Rate: with the output free, a
// channel-parallel round of n_filt*n_vec*red_len operations must finish in about that many
// cycles.
module tb_chiplet;
  import wienna_pkg::*;
  localparam int PES = 64, ROWS = 64, ID = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  rx_valid, e_valid, e_ready, s_valid, s_ready, w_valid, w_ready;
  logic                  n_valid, n_ready, busy, rx_on;
  wl_hdr_t               rx_hdr;
  logic [WL_BYTES*8-1:0] rx_data;
  flit_t                 e_flit, s_flit, w_flit, n_flit;
  int checks = 0, failures = 0;

  chiplet #(.PES(PES), .ROWS(ROWS)) dut (
    .clk, .rst_n, .chip_id(10'(ID)), .at_col0(1'b1), .rx_valid, .rx_hdr, .rx_data,
    .e_valid, .e_flit, .e_ready, .s_valid, .s_flit, .s_ready, .w_valid, .w_flit, .w_ready,
    .n_valid, .n_flit, .n_ready, .busy, .rx_on);

  logic [7:0] wb [int];   // weight bytes by local byte address
  logic [7:0] ib [int];   // input bytes by local byte address
  flit_t own_q[$];
  flit_t fwd_q[$];
  bit    stall = 1, fwd_on = 1;
  int    fwd_seq = 0;

  function automatic logic [7:0] act(int s, int sh);
    int r;
    r = (s < 0) ? 0 : (s >>> sh);
    return (r > 127) ? 8'd127 : 8'(r);
  endfunction

  // neighbour traffic and output stall
  always @(negedge clk) begin
    n_ready = stall ? ($urandom % 4 != 0) : 1'b1;
    if (!(e_valid && !e_ready)) begin
      e_valid = fwd_on && ($urandom % 8 == 0);
      e_flit.addr = 24'h800000 | 24'(fwd_seq); e_flit.data = {4{$urandom}};
    end
    if (!(s_valid && !s_ready)) begin
      s_valid = fwd_on && ($urandom % 8 == 0);
      s_flit.addr = 24'hc00000 | 24'(fwd_seq); s_flit.data = {4{$urandom}};
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (e_valid && e_ready) begin fwd_q.push_back(e_flit); fwd_seq++; end
    if (s_valid && s_ready) begin fwd_q.push_back(s_flit); fwd_seq++; end
    if (w_valid) begin failures++; $display("FAIL west output used in column 0"); end
    if (n_valid && n_ready) begin
      checks++;
      if (n_flit.addr[23]) begin
        int k;
        k = -1;
        foreach (fwd_q[i]) if (k < 0 && fwd_q[i] == n_flit) k = i;
        if (k < 0) begin failures++; $display("FAIL forwarded flit lost/corrupt"); end
        else fwd_q.delete(k);
      end else begin
        flit_t e;
        if (own_q.size() == 0) begin failures++; $display("FAIL unexpected output flit"); end
        else begin
          e = own_q.pop_front();
          if (e !== n_flit) begin
            failures++; $display("FAIL output flit addr %0d/%0d data %h exp %h", n_flit.addr, e.addr, n_flit.data, e.data);
          end
        end
      end
    end
  end

  task automatic send(frame_kind_e k, bit b, int dst, int addr, logic [WL_BYTES*8-1:0] d);
    @(negedge clk);
    rx_valid = 1; rx_hdr.kind = k; rx_hdr.bcast = b; rx_hdr.dst = 10'(dst); rx_hdr.addr = 16'(addr);
    rx_data = d;
    @(negedge clk) rx_valid = 0;
  endtask

  task automatic send_bytes(frame_kind_e k, int nbytes, bit is_w);
    for (int a = 0; a < nbytes; a += WL_BYTES) begin
      logic [WL_BYTES*8-1:0] d;
      for (int i = 0; i < WL_BYTES; i++) begin
        d[i*8 +: 8] = 8'($urandom);
        if (is_w) wb[a+i] = d[i*8 +: 8]; else ib[a+i] = d[i*8 +: 8];
      end
      // an unrelated unicast to another chiplet, which must be ignored
      if ($urandom % 4 == 0) send(k, 0, ID + 1, a / WL_BYTES, ~d);
      send(k, 0, ID, a / WL_BYTES, d);
    end
  endtask

  task automatic layer(bit xp, int nf, int nv, int len, int rounds, int sh, bit check_rate);
    chip_cfg_t c;
    int ow, ob;
    ob = 1000;
    ow = xp ? nf * nv * (PES / NOP_BYTES) : (nf * nv + NOP_BYTES - 1) / NOP_BYTES;
    c = '0; c.xp_mode = xp; c.n_active = 11'd3; c.n_filt = 16'(nf); c.n_vec = 16'(nv);
    c.red_len = 16'(len); c.shift = 5'(sh); c.out_base = 24'(ob);
    send(FR_CONFIG, 1, 1023, 0, (WL_BYTES*8)'(c));
    wb.delete();
    send_bytes(FR_WEIGHT, xp ? ((nf * len + WL_BYTES - 1) / WL_BYTES) * WL_BYTES : nf * len * PES, 1);
    for (int r = 0; r < rounds; r++) begin
      logic [7:0] outs[$];
      int t0;
      ib.delete();
      send_bytes(FR_INPUT, nv * len * PES, 0);
      // reference
      for (int v = 0; v < nv; v++)
        for (int f = 0; f < nf; f++)
          if (!xp) begin
            int s; s = 0;
            for (int t = 0; t < len; t++)
              for (int p = 0; p < PES; p++)
                s += int'($signed(wb[(f*len+t)*PES+p])) * int'($signed(ib[(v*len+t)*PES+p]));
            outs.push_back(act(s, sh));
          end else begin
            for (int p = 0; p < PES; p++) begin
              int s; s = 0;
              for (int t = 0; t < len; t++)
                s += int'($signed(wb[f*len+t])) * int'($signed(ib[(v*len+t)*PES+p]));
              outs.push_back(act(s, sh));
            end
          end
      for (int k = 0; k < ow; k++) begin
        flit_t fl;
        fl.addr = 24'(ob + (r * 3 + ID) * ow + k);
        fl.data = '0;
        for (int i = 0; i < NOP_BYTES; i++) if (k * NOP_BYTES + i < outs.size()) fl.data[i*8 +: 8] = outs[k*NOP_BYTES+i];
        own_q.push_back(fl);
      end
      // a start multicast to a set that excludes this chiplet must not start it
      send(FR_START, 1, ID - 1, 0, '0);
      checks++; if (busy) begin failures++; $display("FAIL started by a multicast to another set"); end
      send(FR_START, 1, ID, 0, '0);
      t0 = $time / 10;
      while (busy) @(negedge clk);
      if (check_rate) begin
        checks++;
        if (($time / 10) - t0 > nf * nv * len + 12) begin
          failures++; $display("FAIL rate: %0d cycles for %0d operations", ($time / 10) - t0, nf * nv * len);
        end
      end
      while (own_q.size() != 0) @(negedge clk);
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx_valid = 0; rx_hdr = '0; rx_data = '0; e_valid = 0; s_valid = 0; e_flit = '0; s_flit = '0;
    n_ready = 1; w_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    layer(0, 3, 2, 4, 2, 6, 0);     // KP-CP / NP-CP style
    layer(1, 3, 3, 21, 2, 7, 0);    // YP-XP style (63 of 64 input rows)
    layer(0, 5, 4, 2, 1, 5, 0);     // back to channel-parallel
    fwd_on = 0; stall = 0;
    repeat (20) @(negedge clk);
    layer(0, 4, 4, 3, 1, 6, 1);     // rate check, output free
    repeat (20) @(negedge clk);
    checks++;
    if (fwd_q.size() != 0) begin failures++; $display("FAIL %0d forwarded flits missing", fwd_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
