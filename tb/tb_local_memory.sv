// tb_local_memory: writes random wireless words at random addresses, then reads whole rows
// and compares them with a reference copy; checks the one-cycle read latency.
module tb_local_memory;
  localparam int ROWS = 32, RB = 64, WB = 32, SEGS = RB / WB;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                         we, re;
  logic [$clog2(ROWS*SEGS)-1:0] waddr;
  logic [WB*8-1:0]              wdata;
  logic [$clog2(ROWS)-1:0]      raddr;
  logic [RB*8-1:0]              rdata;
  logic [WB*8-1:0]              model [ROWS*SEGS];
  int checks = 0, failures = 0;

  local_memory #(.ROWS(ROWS), .ROW_BYTES(RB), .WR_BYTES(WB)) dut (.*);

  function automatic logic [WB*8-1:0] rnd_word();
    logic [WB*8-1:0] w;
    for (int i = 0; i < WB / 4; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int a = 0; a < ROWS * SEGS; a++) begin
      @(negedge clk) we = 1; waddr = a[$bits(waddr)-1:0]; wdata = rnd_word(); model[a] = wdata;
    end
    for (int k = 0; k < 200; k++) begin
      @(negedge clk) we = 1; waddr = $bits(waddr)'($urandom); wdata = rnd_word(); model[waddr] = wdata;
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < 300; k++) begin
      int r;
      r = $urandom % ROWS;
      @(negedge clk) re = 1; raddr = r[$bits(raddr)-1:0];
      @(negedge clk) re = 0;
      checks++;
      if (rdata !== {model[r*SEGS+1], model[r*SEGS]}) begin
        failures++; $display("FAIL row %0d", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
