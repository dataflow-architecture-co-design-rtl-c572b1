// tb_wireless_tx: random frames with random gaps; each must appear on the channel side exactly
// one cycle later, unchanged, and the unicast/broadcast counters must match.
module tb_wireless_tx;
  import wienna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  req_valid, tx_valid;
  wl_hdr_t               req_hdr, tx_hdr;
  logic [WL_BYTES*8-1:0] req_data, tx_data;
  logic [31:0]           n_unicast, n_bcast;
  int checks = 0, failures = 0, nu = 0, nb = 0;

  wireless_tx dut (.*);

  logic                  pv = 0;
  wl_hdr_t               ph;
  logic [WL_BYTES*8-1:0] pd;

  always @(posedge clk) if (rst_n) begin
    #1;
    checks++;
    if (tx_valid != pv || (pv && (tx_hdr != ph || tx_data != pd)) || n_unicast != 32'(nu) || n_bcast != 32'(nb)) begin
      failures++; $display("FAIL at %0t", $time);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_hdr = '0; req_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      req_valid = ($urandom % 3 != 0);
      req_hdr = wl_hdr_t'($urandom);
      for (int i = 0; i < WL_BYTES / 4; i++) req_data[i*32 +: 32] = $urandom;
      pv = req_valid; ph = req_hdr; pd = req_data;
      if (req_valid) begin if (req_hdr.bcast) nb++; else nu++; end
    end
    @(negedge clk) req_valid = 0; pv = 0;
    repeat (2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
