// tb_wireless_rx: sends a random mix of multicast frames (sets that do and do not include this
// receiver, the full set among them), unicasts to this receiver and unicasts to others, of every kind, and checks what the receiver does with each: memory
// writes only for frames it should take, configuration latched, start only when its id is
// below the active-chiplet count, and its word counter.
module tb_wireless_rx;
  import wienna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [9:0]            chip_id;
  logic                  rx_valid, rx_on, w_we, i_we, cfg_load, start;
  wl_hdr_t               rx_hdr;
  logic [WL_BYTES*8-1:0] rx_data, wdata;
  logic [8:0]            waddr;
  chip_cfg_t             cfg;
  logic [31:0]           words_rx;
  int checks = 0, failures = 0, taken = 0;

  wireless_rx #(.WADDR_W(9)) dut (.*);

  chip_cfg_t model_cfg;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chip_id = 10'd37; rx_valid = 0; rx_hdr = '0; rx_data = '0; model_cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      bit mine;
      @(negedge clk);
      rx_valid = ($urandom % 4 != 0);
      rx_hdr.kind  = frame_kind_e'($urandom % 4);
      rx_hdr.bcast = ($urandom % 3 == 0);
      rx_hdr.dst   = ($urandom % 2) ? 10'd37 - 10'd1 + 10'($urandom % 3) : 10'($urandom % 80);
      if ($urandom % 8 == 0) rx_hdr.dst = '1;
      rx_hdr.addr  = 16'($urandom);
      for (int i = 0; i < WL_BYTES / 4; i++) rx_data[i*32 +: 32] = $urandom;
      if (rx_hdr.kind == FR_CONFIG) rx_data[CFG_W-12 +: 11] = 11'(20 + $urandom % 40); // n_active around the id
      #1;
      mine = rx_valid && (rx_hdr.bcast ? (rx_hdr.dst >= 10'd37) : (rx_hdr.dst == 10'd37));
      checks++;
      if (rx_on != mine ||
          w_we != (mine && rx_hdr.kind == FR_WEIGHT) ||
          i_we != (mine && rx_hdr.kind == FR_INPUT) ||
          cfg_load != (mine && rx_hdr.kind == FR_CONFIG) ||
          start != (mine && rx_hdr.kind == FR_START && model_cfg.n_active > 11'd37) ||
          ((w_we || i_we) && (waddr != rx_hdr.addr[8:0] || wdata != rx_data))) begin
        failures++;
        $display("FAIL frame %0d kind %0d bcast %0d dst %0d", n, rx_hdr.kind, rx_hdr.bcast, rx_hdr.dst);
      end
      if (mine) taken++;
      @(posedge clk);
      if (mine && rx_hdr.kind == FR_CONFIG) model_cfg = chip_cfg_t'(rx_data[CFG_W-1:0]);
      #1;
      checks++;
      if (cfg != model_cfg || words_rx != 32'(taken)) begin
        failures++; $display("FAIL cfg/counter at %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
