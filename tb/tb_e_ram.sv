// tb_e_ram: writes random (n, b) words to all 64 crystals, then reads them
// back through both ports at independent random addresses, checking the
// one-clock read latency against a shadow copy.
module tb_e_ram;
  import pet_pkg::*;
  logic clk = 0;
  logic wr_en;
  crystal_idx_t wr_addr, ra0, ra1;
  corr_param_t  wr_data, rd0, rd1;
  corr_param_t  shadow [64];
  int checks = 0, failures = 0;

  e_ram dut (.clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
             .rd_addr0(ra0), .rd_addr1(ra1), .rd_data0(rd0), .rd_data1(rd1));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; ra0 = 0; ra1 = 0; wr_addr = 0; wr_data = 0;
    // power-up contents are zero
    for (int i = 0; i < 64; i++) begin
      ra0 = 6'(i); ra1 = 6'(63 - i);
      @(posedge clk); #1;
      checks++;
      if (rd0 != '0 || rd1 != '0) failures++;
    end
    for (int i = 0; i < 64; i++) begin
      wr_en = 1; wr_addr = 6'(i); wr_data = corr_param_t'($urandom);
      shadow[i] = wr_data;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int t = 0; t < 500; t++) begin
      ra0 = 6'($urandom); ra1 = 6'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd0 != shadow[ra0] || rd1 != shadow[ra1]) begin
        failures++;
        $display("read mismatch a0=%0d a1=%0d", ra0, ra1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
