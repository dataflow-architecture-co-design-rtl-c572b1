// tb_pe: drives random dot products of random length into one PE with random gaps and random
// back-pressure on the output, and compares every sum and activation with a reference.
// Also checks the rate: with no gaps and no back-pressure 64 operations are taken in 64
// consecutive cycles, and a sum appears one cycle after its last operation is taken.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              op_valid, op_last, op_ready, out_valid, out_ready;
  logic signed [7:0] op_in, op_w;
  logic [4:0]        shift;
  logic signed [31:0] out_sum;
  logic [7:0]        out_act;
  int checks = 0, failures = 0;

  pe #(.DATA_W(8), .ACC_W(32), .DEPTH(4)) dut (.*);

  int exp_q[$];
  int acc;
  bit random_ready = 1;

  function automatic logic [7:0] ref_act(int s, int sh);
    int r;
    r = (s < 0) ? 0 : (s >>> sh);
    return (r > 127) ? 8'd127 : 8'(r);
  endfunction

  // Output side: compare each sum as it leaves.
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    checks++;
    e = exp_q.pop_front();
    if (out_sum !== e || out_act !== ref_act(e, int'(shift))) begin
      failures++;
      $display("FAIL sum=%0d exp=%0d act=%0d", out_sum, e, out_act);
    end
  end

  always @(negedge clk) out_ready = random_ready ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_valid = 0; op_last = 0; op_in = 0; op_w = 0; shift = 5'd4; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random dot products with gaps and back-pressure
    for (int n = 0; n < 300; n++) begin
      int len;
      len = 1 + $urandom % 9;
      acc = 0;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        while (!op_ready || ($urandom % 4 == 0)) begin op_valid = 0; @(negedge clk); end
        op_valid = 1;
        op_in = 8'($urandom); op_w = 8'($urandom);
        op_last = (i == len - 1);
        acc += int'(op_in) * int'(op_w);
        if (op_last) exp_q.push_back(acc);
      end
      @(negedge clk) op_valid = 0;
    end
    wait (exp_q.size() == 0);
    // rate: 64 back-to-back operations, output always ready
    random_ready = 0;
    repeat (4) @(posedge clk);
    begin
      int t0, t1, t_out;
      acc = 0;
      @(negedge clk);
      t0 = $time / 10;
      for (int i = 0; i < 64; i++) begin
        if (!op_ready) begin failures++; $display("FAIL: PE not ready during stream"); end
        op_valid = 1; op_in = 8'($urandom); op_w = 8'($urandom); op_last = (i == 63);
        acc += int'(op_in) * int'(op_w);
        if (op_last) exp_q.push_back(acc);
        @(negedge clk);
      end
      op_valid = 0;
      t1 = $time / 10;
      checks++;
      if (t1 - t0 != 64) begin failures++; $display("FAIL rate %0d", t1 - t0); end
      while (!out_valid) @(negedge clk);
      t_out = $time / 10;
      // last op pushed at t1-1 (taken at edge t1), popped at edge t1+1, sum visible after it
      checks++;
      if (t_out - t1 > 2) begin failures++; $display("FAIL latency %0d", t_out - t1); end
    end
    wait (exp_q.size() == 0);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
