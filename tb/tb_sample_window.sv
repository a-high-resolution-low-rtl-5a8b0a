// tb_sample_window: fires triggers with several delays and integration
// settings and checks, cycle by cycle, when the window opens (4 + delay
// cycles after the trigger edge: two synchroniser flops, edge detection and
// the output register), that it lasts 164 samples, and where the
// integration gate, the charge strobe and the calculation strobe fall.
module tb_sample_window;
  import font_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic trig_in = 0;
  logic [15:0] trig_delay;
  logic [IDX_W-1:0] win_len = '0;
  logic [IDX_W-1:0] int_start, q_sample, smp_idx;
  logic [3:0] int_len;
  logic win_active, win_first, int_gate, q_strobe, calc_start, trig_seen;

  sample_window dut (.*);

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(int d, int s, int n, int qs);
    int cyc, first_cyc, act, gates, qpos, cpos, gfirst, glast;
    trig_delay = 16'(d); int_start = IDX_W'(s); int_len = 4'(n); q_sample = IDX_W'(qs);
    @(negedge clk) trig_in = 1;
    cyc = 0; first_cyc = -1; act = 0; gates = 0; qpos = -1; cpos = -1; gfirst = -1; glast = -1;
    repeat (d + 200) begin
      @(posedge clk); #0.1; cyc++;
      if (win_first) first_cyc = cyc;
      if (win_active) begin
        chk(int'(smp_idx) == act, $sformatf("index %0d expected %0d", smp_idx, act));
        act++;
      end
      if (int_gate) begin gates++; if (gfirst < 0) gfirst = int'(smp_idx); glast = int'(smp_idx); end
      if (q_strobe) qpos = int'(smp_idx);
      if (calc_start) cpos = int'(smp_idx);
    end
    trig_in = 0;
    repeat (5) @(negedge clk);
    chk(first_cyc == 4 + d, $sformatf("window opened after %0d cycles, expected %0d", first_cyc, 4 + d));
    chk(act == ((win_len == 0 || win_len > WINDOW_LEN) ? WINDOW_LEN : int'(win_len)), $sformatf("window length %0d", act));
    chk(gates == n, $sformatf("gate count %0d expected %0d", gates, n));
    chk(gfirst == s && glast == s + n - 1, $sformatf("gate %0d..%0d", gfirst, glast));
    chk(qpos == qs, $sformatf("q strobe at %0d", qpos));
    chk(cpos == s + MAX_INT, $sformatf("calc_start at %0d expected %0d", cpos, s + MAX_INT));
  endtask

  initial begin
    trig_delay = 0; int_start = 0; int_len = 1; q_sample = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    run(0, 20, 1, 20);
    run(1, 20, 15, 22);
    run(7, 0, 10, 5);
    run(30, 100, 11, 101);
    run(3, 40, 5, 39);
    win_len = 8'd60;  run(2, 30, 15, 31);
    win_len = 8'd200; run(0, 5, 3, 5);
    win_len = 8'd0;
    // a second trigger edge during the window must be ignored
    trig_delay = 0; int_start = 10; int_len = 2; q_sample = 10;
    begin
      static int n_first = 0;
      for (int c = 0; c < 400; c++) begin
        @(negedge clk);
        trig_in = (c < 50) || (c >= 52);   // second rising edge at cycle 52
        @(posedge clk); #0.1;
        if (win_first) n_first++;
      end
      trig_in = 0;
      chk(n_first == 1, $sformatf("%0d windows from retrigger", n_first));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
