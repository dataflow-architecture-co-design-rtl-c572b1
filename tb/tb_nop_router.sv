// tb_nop_router: offers random flits on the three inputs with random back-pressure on the
// output, in a column-0 router (output north) and an inner router (output west). Checks that
// every flit leaves once, on the right port, in order per input, that the other port stays
// silent, and that with
// all inputs busy and the output free one flit leaves per cycle.
module tb_nop_router;
  import wienna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  at_col0;
  logic  in_valid [3];
  flit_t in_flit  [3];
  logic  in_ready [3];
  logic  w_valid, w_ready, n_valid, n_ready;
  flit_t w_flit, n_flit;
  int checks = 0, failures = 0;

  nop_router #(.DEPTH(2)) dut (.*);

  flit_t sent_q[3][$];
  int    n_out, busy_cycles, out_cycles;
  bit    full_rate;
  bit    hold_off = 0;

  always @(negedge clk) begin
    w_ready = full_rate ? 1'b1 : ($urandom % 3 != 0);
    n_ready = full_rate ? 1'b1 : ($urandom % 3 != 0);
  end

  // drivers: one per input, source id in the top data bits
  for (genvar p = 0; p < 3; p++) begin : g_drv
    int seq = 0;
    always @(posedge clk) if (rst_n) begin
      if (in_valid[p] && in_ready[p]) begin
        sent_q[p].push_back(in_flit[p]);
        seq++;
      end
    end
    always @(negedge clk) if (rst_n) begin
      if (!(in_valid[p] && !in_ready[p])) begin  // hold an offered flit until taken
        in_valid[p] = hold_off ? 1'b0 : full_rate ? 1'b1 : ($urandom % 2 == 0);
        in_flit[p].addr = FLIT_A'($urandom);
        in_flit[p].data = {8'(p), 24'(seq), 32'($urandom), 32'($urandom), 32'($urandom)};
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    logic  v, r;
    flit_t f;
    v = at_col0 ? n_valid : w_valid;
    r = at_col0 ? n_ready : w_ready;
    f = at_col0 ? n_flit : w_flit;
    if (at_col0 ? w_valid : n_valid) begin failures++; $display("FAIL wrong port"); end
    if (v && r) begin
      int p;
      flit_t e;
      p = int'(f.data[127:120]);
      checks++;
      if (p > 2 || sent_q[p].size() == 0) begin failures++; $display("FAIL unknown flit"); end
      else begin
        e = sent_q[p].pop_front();
        if (e !== f) begin failures++; $display("FAIL order/data input %0d", p); end
      end
      n_out++;
      out_cycles++;
    end
    if (full_rate) busy_cycles++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 3; p++) begin in_valid[p] = 0; in_flit[p] = '0; end
    at_col0 = 1; full_rate = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      repeat (3000) @(posedge clk);
      // drain
      @(negedge clk);
      hold_off = 1;
      repeat (50) @(posedge clk);
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (sent_q[p].size() != 0) begin failures++; $display("FAIL lost flits input %0d", p); end
      end
      hold_off = 0;
      at_col0 = 0;
    end
    // full rate: all inputs busy, output always ready
    full_rate = 1;
    repeat (5) @(posedge clk);
    busy_cycles = 0; out_cycles = 0;
    repeat (300) @(posedge clk);
    checks++;
    if (out_cycles < busy_cycles - 1) begin
      failures++; $display("FAIL rate %0d flits in %0d cycles", out_cycles, busy_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
