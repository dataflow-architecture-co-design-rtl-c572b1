// tb_global_sram: full-word and strobed half-word writes at random addresses, then reads
// compared with a reference copy, including a read and a write to the same word in one cycle.
// Runs on a 64 KiB instance; the array is the same code at any size.
module tb_global_sram;
  localparam int BYTES = 65536, WB = 32, WORDS = BYTES / WB, AW = $clog2(WORDS);
  logic clk = 0;
  always #5 clk = ~clk;

  logic            re, we;
  logic [AW-1:0]   raddr, waddr;
  logic [WB*8-1:0] rdata, wdata;
  logic [WB-1:0]   wstrb;
  logic [WB*8-1:0] model [int];
  int checks = 0, failures = 0;

  global_sram #(.BYTES(BYTES), .WORD_BYTES(WB)) dut (.*);

  function automatic logic [WB*8-1:0] rnd();
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
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0; wstrb = 0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk) we = 1; waddr = AW'(a * 7); wdata = rnd(); wstrb = '1; model[a*7] = wdata;
    end
    for (int k = 0; k < 400; k++) begin
      int a;
      logic [WB*8-1:0] m;
      a = (k % 512) * 7;
      @(negedge clk) we = 1; waddr = AW'(a); wdata = rnd(); wstrb = (k % 2) ? {16'hffff, 16'h0} : {16'h0, 16'hffff};
      m = model[a];
      for (int b = 0; b < WB; b++) if (wstrb[b]) m[b*8 +: 8] = wdata[b*8 +: 8];
      model[a] = m;
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < 600; k++) begin
      int a;
      a = ($urandom % 512) * 7;
      @(negedge clk) re = 1; raddr = AW'(a);
      // same-cycle write to the same word: the read returns the old value
      we = (k % 5 == 0); waddr = AW'(a); wdata = rnd(); wstrb = '1;
      @(negedge clk) re = 0; we = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL word %0d", a); end
      if (k % 5 == 0) model[a] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
