// tb_kick_timing: sends kick values with added delays 0..40 and several
// hold lengths; checks the DAC word appears 1+delay cycles after v_valid as
// offset binary, stays for kick_len cycles and returns to mid-scale, and
// that the amplifier gate covers exactly samples amp_start..amp_start+len-1.
module tb_kick_timing;
  import font_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [DAC_W-1:0] v_in = '0;
  logic v_valid = 0, win_active = 0;
  logic [7:0] kick_delay = '0, amp_len = '0;
  logic [15:0] kick_len = 16'd1;
  logic [IDX_W-1:0] smp_idx = '0, amp_start = '0;
  logic [DAC_W-1:0] dac_code;
  logic dac_update, amp_trig;

  kick_timing dut (.*);

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic kick(int v, int d, int len);
    int on_cyc, off_cyc, cyc, exp_code, updates;
    exp_code = (v + 8192) & 16'h3fff;
    kick_delay = 8'(d); kick_len = 16'(len);
    @(negedge clk) begin v_in = DAC_W'(v); v_valid = 1; end
    @(negedge clk) begin v_valid = 0; v_in = '0; end
    cyc = 1; on_cyc = -1; off_cyc = -1; updates = 0;
    // cyc counts cycles after the v_valid cycle
    repeat (d + len + 10) begin
      if (dac_update) updates++;
      if (on_cyc < 0 && int'(dac_code) == exp_code && dac_update) on_cyc = cyc;
      else if (on_cyc >= 0 && off_cyc < 0 && int'(dac_code) == 8192) off_cyc = cyc;
      @(negedge clk); cyc++;
    end
    chk(on_cyc == 1 + d, $sformatf("kick %0d appeared at %0d expected %0d", v, on_cyc, 1 + d));
    chk(off_cyc - on_cyc == (len == 0 ? 1 : len), $sformatf("held %0d expected %0d", off_cyc - on_cyc, len));
    chk(updates == 2, $sformatf("%0d updates", updates));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    chk(dac_code == 14'd8192, "reset output is mid-scale");
    kick(2000, 0, 5);
    kick(-3000, 1, 1);
    kick(8191, 7, 20);
    kick(-8192, 40, 3);
    kick(-1, 12, 0);
    for (int r = 0; r < 10; r++) kick($urandom_range(0, 16383) - 8192, $urandom_range(0, 50), $urandom_range(1, 30));
    // amplifier gate
    amp_start = 8'd30; amp_len = 8'd25;
    begin
      int first = -1, last = -1, n = 0;
      for (int k = 0; k < WINDOW_LEN; k++) begin
        @(negedge clk) begin win_active = 1; smp_idx = IDX_W'(k); end
        @(posedge clk); #0.1;
        if (amp_trig) begin n++; if (first < 0) first = k; last = k; end
      end
      @(negedge clk) win_active = 0;
      chk(first == 30 && last == 54 && n == 25, $sformatf("amp gate %0d..%0d n=%0d", first, last, n));
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
