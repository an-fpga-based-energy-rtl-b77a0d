// tb_l_rom: reads every entry of the logarithm table and compares it with
// round(2^12 * ln(x)) mod 2^14 computed in floating point.
module tb_l_rom;
  logic        clk = 0;
  logic [11:0] addr;
  logic [13:0] data;
  int checks = 0, failures = 0;

  l_rom dut (.clk(clk), .addr(addr), .data(data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned expv;
    for (int x = 1; x < 4096; x++) begin
      addr = 12'(x);
      @(posedge clk); #1;
      expv = int'($floor(4096.0 * $ln(real'(x)) + 0.5)) % 16384;
      checks++;
      if (data != 14'(expv)) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d got=%0d exp=%0d", x, data, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
