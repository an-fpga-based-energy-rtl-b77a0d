// tb_r_rom: reads every entry of the reciprocal table and compares it with
// floor(2^20 / x), saturated to 2^20 - 1.
module tb_r_rom;
  logic        clk = 0;
  logic [11:0] addr;
  logic [19:0] data;
  int checks = 0, failures = 0;

  r_rom dut (.clk(clk), .addr(addr), .data(data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expv;
    for (int x = 0; x < 4096; x++) begin
      addr = 12'(x);
      @(posedge clk); #1;
      expv = (x < 2) ? 1048575 : longint'($floor(1048576.0 / real'(x)));
      checks++;
      if (data != 20'(expv)) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d got=%0d exp=%0d", x, data, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
