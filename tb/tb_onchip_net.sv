// tb_onchip_net: random rows and partial sums in both modes; checks the per-PE distribution
// (lane-wise or broadcast of the selected weight byte) and the adder-tree total.
module tb_onchip_net;
  localparam int PES = 64;
  logic                    xp_mode;
  logic [PES*8-1:0]        w_row, i_row;
  logic [5:0]              w_sel;
  logic [7:0]              pe_w [PES];
  logic [7:0]              pe_in[PES];
  logic signed [31:0]      psum [PES];
  logic signed [31:0]      total;
  int checks = 0, failures = 0;

  onchip_net #(.PES(PES), .DATA_W(8), .ACC_W(32)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      int s;
      xp_mode = n[0];
      for (int i = 0; i < PES / 4; i++) begin w_row[i*32 +: 32] = $urandom; i_row[i*32 +: 32] = $urandom; end
      w_sel = 6'($urandom);
      s = 0;
      for (int p = 0; p < PES; p++) begin psum[p] = $signed($urandom) >>> 8; s += psum[p]; end
      #1;
      for (int p = 0; p < PES; p++) begin
        checks++;
        if (pe_in[p] !== i_row[p*8 +: 8] ||
            pe_w[p] !== (xp_mode ? w_row[int'(w_sel)*8 +: 8] : w_row[p*8 +: 8])) begin
          failures++; $display("FAIL lane %0d mode %0d", p, xp_mode);
        end
      end
      checks++;
      if (total !== s) begin failures++; $display("FAIL total %0d exp %0d", total, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
