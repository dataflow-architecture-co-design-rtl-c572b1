// tb_chiplet_ctrl: runs the sequencer in both modes with random stalls on pes_ready and
// compares the sequence of (weight row, input row, weight byte, last) it issues with the loop
// nest worked out here. With pes_ready always high it must issue one operation per cycle.
module tb_chiplet_ctrl;
  import wienna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  chip_cfg_t  cfg;
  logic       start, pes_ready, w_re, i_re, op_valid, op_last, busy;
  logic [7:0] w_raddr, i_raddr;
  logic [5:0] w_sel_q;
  int checks = 0, failures = 0;

  chiplet_ctrl #(.PES(64), .ROWS(256)) dut (.*);

  typedef struct { int wr; int ir; int sel; bit last; } op_t;
  op_t exp_q[$];
  op_t pend;
  bit  pend_v = 0;
  int  n_ops;
  bit  stall_en = 1;

  always @(negedge clk) pes_ready = stall_en ? ($urandom % 4 != 0) : 1'b1;

  // Reads issued in one cycle come back as op_valid the next.
  always @(posedge clk) if (rst_n) begin
    if (op_valid) begin
      op_t e;
      checks++;
      if (!pend_v || exp_q.size() == 0) begin failures++; $display("FAIL unexpected op"); end
      else begin
        e = exp_q.pop_front();
        if (pend.wr != e.wr || pend.ir != e.ir || op_last != e.last ||
            (cfg.xp_mode && int'(w_sel_q) != e.sel)) begin
          failures++;
          $display("FAIL got w%0d i%0d s%0d l%0d exp w%0d i%0d s%0d l%0d", pend.wr, pend.ir,
                   w_sel_q, op_last, e.wr, e.ir, e.sel, e.last);
        end
      end
      n_ops++;
    end
    pend_v = w_re;
    if (w_re) begin
      pend.wr = int'(w_raddr); pend.ir = int'(i_raddr);
      if (!i_re) begin failures++; $display("FAIL i_re"); end
    end
  end

  task automatic run(bit xp, int nf, int nv, int len);
    int t0;
    cfg = '0;
    cfg.xp_mode = xp; cfg.n_filt = 16'(nf); cfg.n_vec = 16'(nv); cfg.red_len = 16'(len);
    cfg.n_active = 11'd1;
    for (int v = 0; v < nv; v++)
      for (int f = 0; f < nf; f++)
        for (int t = 0; t < len; t++) begin
          op_t o;
          int e;
          e = f * len + t;
          o.wr = xp ? e / 64 : e; o.sel = e % 64; o.ir = v * len + t; o.last = (t == len - 1);
          exp_q.push_back(o);
        end
    n_ops = 0;
    @(negedge clk) start = 1;
    t0 = $time / 10;
    @(negedge clk) start = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_ops != nf * nv * len) begin
      failures++; $display("FAIL count %0d left %0d", n_ops, exp_q.size());
    end
    if (!stall_en) begin
      checks++;
      if (($time / 10) - t0 - 3 != nf * nv * len) begin
        failures++; $display("FAIL rate: %0d cycles for %0d ops", ($time / 10) - t0 - 3, nf * nv * len);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; start = 0; pes_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 3, 2, 4);
    run(1, 5, 3, 30);
    run(0, 1, 1, 1);
    run(1, 2, 2, 70);
    stall_en = 0;
    run(0, 4, 4, 8);
    run(1, 4, 2, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
