// tb_charge_lut: fills part of the table with random values, overwrites
// some, then reads random written addresses and checks data one cycle later.
module tb_charge_lut;
  import font_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [LUT_AW-1:0] waddr = '0, raddr = '0;
  logic signed [LUT_DW-1:0] wdata = '0, rdata;
  logic signed [LUT_DW-1:0] model [int];

  charge_lut dut (.*);

  initial begin
    int addrs [$];
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      we = 1;
      waddr = (i < 300) ? LUT_AW'(i * 13) : LUT_AW'(((i - 300) % 300) * 13);
      wdata = LUT_DW'($urandom);
      model[int'(waddr)] = wdata;
      if (i < 300) addrs.push_back(int'(waddr));
    end
    @(negedge clk) we = 0;
    // address 4095 as well
    @(negedge clk) begin we = 1; waddr = '1; wdata = 16'sh1234; model[4095] = wdata; addrs.push_back(4095); end
    @(negedge clk) we = 0;
    for (int i = 0; i < 500; i++) begin
      int a;
      a = addrs[$urandom_range(0, addrs.size() - 1)];
      @(negedge clk) raddr = LUT_AW'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL addr %0d got %0d exp %0d", a, rdata, model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
