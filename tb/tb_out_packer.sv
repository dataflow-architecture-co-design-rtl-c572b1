// tb_out_packer: feeds rounds of output groups in both modes with random gaps and random
// back-pressure on the flit side; checks every flit's address and data against the packing
// rule (bytes in order, zero padded; PES/NOP_BYTES flits per output-stationary group) and that
// `done` comes once per round.
module tb_out_packer;
  import wienna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start, xp_mode, grp_valid, grp_ready, flit_valid, flit_ready, busy, done;
  logic [FLIT_A-1:0] base;
  logic [31:0]       n_groups;
  logic [64*8-1:0]   grp_data;
  flit_t             flit;
  int checks = 0, failures = 0, n_done = 0;

  out_packer #(.PES(64)) dut (.*);

  flit_t exp_q[$];

  always @(negedge clk) flit_ready = ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n) begin
    if (flit_valid && flit_ready) begin
      flit_t e;
      checks++;
      e = exp_q.pop_front();
      if (flit !== e) begin failures++; $display("FAIL flit %h exp %h", flit, e); end
    end
    if (done) n_done++;
  end

  task automatic round(bit xp, int n, int b);
    logic [64*8-1:0] d[$];
    for (int g = 0; g < n; g++) begin
      logic [64*8-1:0] x;
      for (int i = 0; i < 16; i++) x[i*32 +: 32] = $urandom;
      d.push_back(x);
      if (xp) for (int c = 0; c < 4; c++) begin
        flit_t f; f.addr = FLIT_A'(b + g * 4 + c); f.data = x[c*128 +: 128]; exp_q.push_back(f);
      end
    end
    if (!xp) for (int k = 0; k < (n + 15) / 16; k++) begin
      flit_t f;
      f.addr = FLIT_A'(b + k); f.data = '0;
      for (int i = 0; i < 16; i++) if (k * 16 + i < n) f.data[i*8 +: 8] = d[k*16+i][7:0];
      exp_q.push_back(f);
    end
    @(negedge clk);
    xp_mode = xp; base = FLIT_A'(b); n_groups = n; start = 1;
    @(negedge clk) start = 0;
    for (int g = 0; g < n; g++) begin
      while ($urandom % 3 == 0) @(negedge clk);
      grp_valid = 1; grp_data = d[g];
      @(posedge clk);
      while (!grp_ready) @(posedge clk);
      @(negedge clk) grp_valid = 0;
    end
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; xp_mode = 0; grp_valid = 0; grp_data = 0; base = 0; n_groups = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    round(0, 37, 100);
    round(1, 5, 2000);
    round(0, 16, 7);
    round(0, 1, 50);
    round(1, 1, 9);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_done != 5) begin
      failures++; $display("FAIL left %0d done %0d", exp_q.size(), n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
