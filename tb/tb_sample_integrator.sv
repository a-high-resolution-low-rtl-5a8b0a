// tb_sample_integrator: random sample stream with integration windows of
// 1..15 samples (full-scale samples included); the sum is compared every
// cycle with a running sum kept here.
module tb_sample_integrator;
  import font_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear = 0, gate = 0;
  logic signed [COR_W-1:0] din = '0;
  logic signed [SUM_W-1:0] sum;

  sample_integrator dut (.*);

  int model = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int w = 0; w < 60; w++) begin
      int s, n, full;
      s = $urandom_range(0, 5); n = $urandom_range(1, 15); full = (w % 4 == 0);
      for (int k = 0; k < 30; k++) begin
        @(negedge clk);
        if (k > 0) begin
          checks++;
          if (int'(sum) != model) begin failures++; $display("FAIL w%0d k%0d sum %0d exp %0d", w, k, sum, model); end
        end
        clear = (k == 0);
        gate  = (k >= s && k < s + n);
        din   = full ? (w % 8 == 0 ? -COR_W'(2**(COR_W-1)) : COR_W'(2**(COR_W-1) - 1)) : COR_W'($urandom);
        if (clear) model = gate ? int'(din) : 0;
        else if (gate) model += int'(din);
      end
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
