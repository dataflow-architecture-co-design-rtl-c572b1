// tb_wireless_channel: with no error injection every frame must reach the receiver side one
// cycle after it is sent, unchanged. A second instance with a high error rate must flip
// exactly one payload bit in some frames and never touch the header.
module tb_wireless_channel;
  import wienna_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                  tx_valid, rx_valid, rx_valid2;
  wl_hdr_t               tx_hdr, rx_hdr, rx_hdr2;
  logic [WL_BYTES*8-1:0] tx_data, rx_data, rx_data2;
  int checks = 0, failures = 0, flipped = 0;

  wireless_channel dut (.*);
  wireless_channel #(.ERR_PER_MILLION(300000)) dut_err (
    .clk, .tx_valid, .tx_hdr, .tx_data, .rx_valid(rx_valid2), .rx_hdr(rx_hdr2), .rx_data(rx_data2));

  logic                  pv = 0;
  wl_hdr_t               ph;
  logic [WL_BYTES*8-1:0] pd;

  always @(posedge clk) begin
    #1;
    checks++;
    if (rx_valid != pv || (pv && (rx_hdr != ph || rx_data != pd))) begin
      failures++; $display("FAIL clean channel at %0t", $time);
    end
    if (pv) begin
      checks++;
      if (rx_hdr2 != ph || $countones(rx_data2 ^ pd) > 1) begin
        failures++; $display("FAIL error model %0d %0d", rx_hdr2 != ph, $countones(rx_data2 ^ pd));
      end
      if (rx_data2 != pd) flipped++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tx_valid = 0; tx_hdr = '0; tx_data = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      tx_valid = ($urandom % 3 != 0);
      tx_hdr = wl_hdr_t'($urandom);
      for (int i = 0; i < WL_BYTES / 4; i++) tx_data[i*32 +: 32] = $urandom;
      pv = tx_valid; ph = tx_hdr; pd = tx_data;
    end
    @(negedge clk);
    checks++;
    if (flipped < 100) begin failures++; $display("FAIL no errors injected (%0d)", flipped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
