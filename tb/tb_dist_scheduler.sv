// tb_dist_scheduler: runs the scheduler on a small global SRAM holding known words, for each
// partitioning strategy, and compares every wireless frame it sends (kind, unicast or
// broadcast, destination, local address, payload) with the sequence worked out here from the
// strategy rules. The testbench plays the collection NoP: after the start frame it returns the
// expected number of output flits at random times, and checks that nothing is sent for the
// next round before they are all in. Rate: from the configuration frame to the first start
// frame the scheduler must send one frame per cycle with no gap.
module tb_dist_scheduler;
  import wienna_pkg::*;
  localparam int BYTES = 65536, AW = $clog2(BYTES / WL_BYTES);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_desc_t           desc;
  logic                  start, busy, done, sram_re, tx_valid, coll_fire;
  logic [AW-1:0]         sram_raddr, waddr;
  logic [WL_BYTES*8-1:0] sram_rdata, tx_data, wdata;
  wl_hdr_t               tx_hdr;
  logic [1:0]            phase_out;
  logic                  we;
  int checks = 0, failures = 0;

  dist_scheduler #(.PES(64), .AW(AW)) dut (.*);
  global_sram #(.BYTES(BYTES), .WORD_BYTES(WL_BYTES)) u_mem (
    .clk, .re(sram_re), .raddr(sram_raddr), .rdata(sram_rdata),
    .we, .waddr, .wstrb({WL_BYTES{1'b1}}), .wdata);

  function automatic logic [WL_BYTES*8-1:0] word_of(int a);
    logic [WL_BYTES*8-1:0] w;
    for (int i = 0; i < WL_BYTES / 4; i++) w[i*32 +: 32] = 32'(a * 16 + i) ^ 32'h5a5a0000;
    return w;
  endfunction

  typedef struct { frame_kind_e kind; bit bcast; int dst; int addr; logic [WL_BYTES*8-1:0] data; } fr_t;
  fr_t exp_q[$];
  int  cyc = 0, t_cfg, t_start, n_frames_start, pending_coll;
  bit  collecting;

  always @(posedge clk) cyc++;

  task automatic push(frame_kind_e k, bit b, int dst, int addr, logic [WL_BYTES*8-1:0] d);
    fr_t f; f.kind = k; f.bcast = b; f.dst = dst; f.addr = addr; f.data = d; exp_q.push_back(f);
  endtask

  // Check every frame against the expected sequence.
  always @(posedge clk) if (rst_n) begin
    #1;
    if (tx_valid) begin
      fr_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra frame"); end
      else begin
        e = exp_q.pop_front();
        if (tx_hdr.kind != e.kind || tx_hdr.bcast != e.bcast ||
            int'(tx_hdr.dst) != e.dst ||
            ((e.kind == FR_WEIGHT || e.kind == FR_INPUT) && (int'(tx_hdr.addr) != e.addr || tx_data != e.data)) ||
            (e.kind == FR_CONFIG && tx_data[CFG_W-1:0] != e.data[CFG_W-1:0])) begin
          failures++;
          $display("FAIL frame kind %0d/%0d bcast %0d/%0d dst %0d/%0d addr %0d/%0d", tx_hdr.kind, e.kind,
                   tx_hdr.bcast, e.bcast, tx_hdr.dst, e.dst, tx_hdr.addr, e.addr);
        end
        if (tx_hdr.kind == FR_INPUT && collecting) begin failures++; $display("FAIL input before collection"); end
        if (tx_hdr.kind == FR_CONFIG) t_cfg = cyc;
        if (tx_hdr.kind == FR_START) begin
          if (n_frames_start == 0) t_start = cyc;
          n_frames_start++;
          collecting = 1;
        end
      end
    end
  end

  task automatic run(strategy_e s, int na, int nf, int nv, int len, int rounds);
    int ww, iw, ow, wb, ib;
    chip_cfg_t c;
    bit cp;
    cp = (s != YP_XP);
    ww = cp ? nf * len * 2 : (nf * len + 31) / 32;
    iw = nv * len * 2;
    ow = cp ? (nf * nv + 15) / 16 : nf * nv * 4;
    wb = 10; ib = 300;
    desc = '0;
    desc.strategy = s; desc.n_active = 11'(na); desc.n_filt = 16'(nf); desc.n_vec = 16'(nv);
    desc.red_len = 16'(len); desc.rounds = 16'(rounds); desc.shift = 5'd3;
    desc.w_base = 24'(wb); desc.i_base = 24'(ib); desc.o_base = 24'd4000;
    c = '0; c.xp_mode = !cp; c.n_active = 11'(na); c.n_filt = 16'(nf); c.n_vec = 16'(nv);
    c.red_len = 16'(len); c.shift = 5'd3; c.out_base = 24'd4000;
    push(FR_CONFIG, 1, 1023, 0, (WL_BYTES*8)'(c));
    if (s == KP_CP) begin
      for (int j = 0; j < na; j++) for (int k = 0; k < ww; k++) push(FR_WEIGHT, 0, j, k, word_of(wb + j * ww + k));
    end else for (int k = 0; k < ww; k++) push(FR_WEIGHT, 1, na - 1, k, word_of(wb + k));
    for (int r = 0; r < rounds; r++) begin
      if (s == KP_CP) for (int k = 0; k < iw; k++) push(FR_INPUT, 1, na - 1, k, word_of(ib + r * iw + k));
      else for (int j = 0; j < na; j++) for (int k = 0; k < iw; k++)
        push(FR_INPUT, 0, j, k, word_of(ib + (r * na + j) * iw + k));
      push(FR_START, 1, na - 1, 0, '0);
    end
    n_frames_start = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int r = 0; r < rounds; r++) begin
      while (!collecting) @(negedge clk);
      if (r == 0) begin
        checks++;
        if (t_start - t_cfg != 1 + ww * (s == KP_CP ? na : 1) + iw * (s == KP_CP ? 1 : na)) begin
          failures++; $display("FAIL rate: %0d cycles from config to start", t_start - t_cfg);
        end
      end
      for (int n = 0; n < ow * na; n++) begin
        while ($urandom % 3 == 0) @(negedge clk);
        if (n == ow * na - 1) collecting = 0;
        coll_fire = 1;
        @(negedge clk) coll_fire = 0;
      end
    end
    while (busy) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d frames missing", exp_q.size()); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc = '0; start = 0; coll_fire = 0; we = 0; waddr = '0; wdata = '0; collecting = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < BYTES / WL_BYTES; a++) begin
      @(negedge clk) we = 1; waddr = AW'(a); wdata = word_of(a);
    end
    @(negedge clk) we = 0;
    run(KP_CP, 4, 3, 2, 2, 3);
    run(NP_CP, 3, 2, 2, 3, 2);
    run(YP_XP, 4, 3, 2, 40, 2);
    run(KP_CP, 1, 1, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
