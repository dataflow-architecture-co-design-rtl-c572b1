// tb_act_unit: checks the activation unit against a reference ReLU, shift and saturation on
// random and corner-case sums.
module tb_act_unit;
  logic signed [31:0] sum;
  logic [4:0]         shift;
  logic [7:0]         act;
  int checks = 0, failures = 0;

  act_unit #(.ACC_W(32), .DATA_W(8)) dut (.sum, .shift, .act);

  function automatic logic [7:0] ref_act(longint s, int sh);
    longint r;
    r = (s < 0) ? 0 : (s >> sh);
    return (r > 127) ? 8'd127 : 8'(r);
  endfunction

  task automatic check(logic signed [31:0] s, logic [4:0] sh);
    sum = s; shift = sh; #1;
    checks++;
    if (act !== ref_act(longint'(s), int'(sh))) begin
      failures++;
      $display("FAIL sum=%0d shift=%0d act=%0d exp=%0d", s, sh, act, ref_act(longint'(s), int'(sh)));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0); check(-1, 0); check(127, 0); check(128, 0); check(255, 1); check(256, 1);
    check(32'h7fffffff, 31); check(32'h80000000, 3); check(1000, 3); check(1023, 3);
    for (int i = 0; i < 2000; i++) begin
      logic signed [31:0] s;
      s = $signed($urandom) >>> ($urandom % 24);
      check(s, 5'($urandom % 12));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
