// tb_workloads: the measurement runs of the feedback system, driven end to
// end through the top level with a short serial bit time.
//
// 1. Latency scan: a constant 2000-count kick is slid later by the added
//    kick delay, 0..40 cycles in steps of 4, with the kick toggled off and on
//    on sequential triggers. The DAC word must appear exactly one cycle later
//    for each added cycle of delay, and keep its value. Then the constant
//    drive is stepped from -8000 to 8000 counts (kicker calibration).
// 2. Resolution scan: single-BPM feedback at IPC with 1..15 integrated
//    samples. Each kick must match the bench's own model and leave at the
//    same clock cycle for every integration length.
// 3. Two-BPM feedback with IPA and IPC, 5 samples, several trains with
//    different beam offsets.
// 4. Window length: the full 164-sample window is captured for read-out; a
//    shorter window set at run time stops capturing at its end.
// Each scan point is checked with the same independent model as the
// end-to-end bench; each workload is counted.
module tb_workloads;
  import font_pkg::*;
  localparam int CPB = 16;               // short serial bit to keep the scans fast
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic trig_in = 0, uart_rxd = 1, uart_txd, dac_update, amp_trig, fb_on;
  logic [ADC_W-1:0]  adc_in [N_CH];
  logic [DAC_W-1:0]  dac_code;
  logic [TRIM_W-1:0] trim_dac [N_CH];

  font_fb_top #(.CLKS_PER_BIT(CPB)) dut (.*);

  // ---------------- mechanism counters ----------------
  int n_two, n_sat, n_clamp, n_amp, n_lat, n_base, n_cal, n_res, n_win;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- serial link ----------------
  task automatic send_byte(int b);
    logic [9:0] f;
    f = {1'b1, 8'(b), 1'b0};
    for (int i = 0; i < 10; i++) begin
      @(negedge clk) uart_rxd = f[i];
      repeat (CPB - 1) @(negedge clk);
    end
  endtask
  task automatic wr(logic [6:0] a, int d);
    send_byte({1'b0, a}); send_byte((d >> 8) & 255); send_byte(d & 255);
    repeat (10) @(negedge clk);
  endtask

  int rxq [$];
  initial begin : serial_out
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      if (uart_txd == 1'b0) begin
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          b[i] = uart_txd;
        end
        repeat (CPB) @(posedge clk);
        if (uart_txd) rxq.push_back(int'(b));
      end
    end
  end
  task automatic rd(logic [6:0] a, output int d);
    rxq.delete();
    send_byte({1'b1, a});
    repeat (24 * CPB) @(negedge clk);
    if (rxq.size() != 2) begin d = -1; $display("read of %0h returned %0d bytes", a, rxq.size()); end
    else d = (rxq[0] << 8) | rxq[1];
  endtask

  // ---------------- bench copy of the settings ----------------
  int offs [N_CH] = '{-60, 260, 35, -120, -60, 260, -20};   // baselines (Fig. 11 style)
  int s_mode = 0, s_two = 0, s_toggle = 0, s_sela = 0, s_selb = 2;
  int s_tdly = 3, s_istart = 20, s_ilen = 1, s_qs = 20, s_kdly = 0, s_klen = 100;
  int s_const = 0, s_coff = 0, s_amps = 0, s_ampl = 0;
  bit model_fb_on = 0;
  longint lut [int];          // key: table * 8192 + address

  task automatic set_ctrl(int mode, int two, int tog);
    s_mode = mode; s_two = two; s_toggle = tog;
    wr(R_CTRL, mode | (two << 2) | (tog << 3));
  endtask
  task automatic set_sel(int a, int b);
    s_sela = a; s_selb = b; wr(R_SEL, a | (b << 2));
  endtask
  // C_i/q entries for one charge address: C = {300, -150, 200, 100} * 2^16 / q
  task automatic load_lut(int qa);
    real c [4];
    c = '{300.0, -150.0, 200.0, 100.0};
    for (int t = 0; t < N_LUT; t++) begin
      longint v;
      v = longint'($rtoi(c[t] * 65536.0 / real'(qa)));
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
      lut[t * 8192 + qa] = v;
      wr(R_LUTADDR, (t << 12) | qa);
      wr(R_LUTDATA, int'(v) & 16'hffff);
    end
  endtask

  // ---------------- waveforms ----------------
  // bunch pulse shape, 25 ns decay = 8.9 samples
  function automatic real shape(int j);
    if (j < 0) return 0.0;
    return (1.0 - $exp(-real'(j + 1) / 1.5)) * $exp(-real'(j) / 8.9);
  endfunction
  int amp_i [3], amp_q [3], qamp, bunch_at;
  // value of channel ch at window index k (13-bit sample, before offset removal)
  function automatic int wave(int ch, int k);
    real v;
    if (ch == 6) v = -real'(qamp) * (shape(k - bunch_at) + shape(k - bunch_at - 100));
    else begin
      int a;
      a = (ch % 2 == 0) ? amp_i[ch / 2] : amp_q[ch / 2];
      v = real'(a) * (shape(k - bunch_at) + 0.8 * shape(k - bunch_at - 100));
    end
    v = v + real'(offs[ch]);
    if (v > 4095.0) v = 4095.0;
    if (v < -4096.0) v = -4096.0;
    return $rtoi(v);
  endfunction

  // ---------------- one train ----------------
  int dac_seen_at, dac_val, dac_changes, amp_first, amp_count;
  task automatic fire_train(output int exp_at, output int exp_v, output bit exp_sat, output bit kicks);
    longint acc, v; int qv, qaddr; int sums [4]; int chans [4];
    int n;
    // model: fb_on for this train
    model_fb_on = s_toggle ? !model_fb_on : 1'b1;
    // model: integrals of the selected channels
    chans[0] = (s_sela < 3) ? 2 * s_sela : -1;
    chans[1] = (s_sela < 3) ? 2 * s_sela + 1 : -1;
    chans[2] = (s_two != 0 && s_selb < 3) ? 2 * s_selb : -1;
    chans[3] = (s_two != 0 && s_selb < 3) ? 2 * s_selb + 1 : -1;
    for (int t = 0; t < 4; t++) begin
      sums[t] = 0;
      if (chans[t] >= 0)
        for (int k = s_istart; k < s_istart + s_ilen; k++) sums[t] += wave(chans[t], k) - offs[chans[t]];
    end
    qv = wave(6, s_qs) - offs[6];
    qaddr = (qv >= 0) ? 0 : ((-qv > 4095) ? 4095 : -qv);
    if (qaddr == 4095) n_clamp++;
    acc = 0;
    for (int t = 0; t < 4; t++) acc += longint'(sums[t]) * lut[t * 8192 + qaddr];
    v = longint'(s_coff) - (acc >>> 16);
    exp_sat = 0;
    if (v > 8191) begin v = 8191; exp_sat = 1; end
    if (v < -8192) begin v = -8192; exp_sat = 1; end
    kicks = model_fb_on && (s_mode == 1 || s_mode == 2);
    if (!model_fb_on || s_mode == 0) exp_v = 0;
    else if (s_mode == 2) begin exp_v = s_const; exp_sat = 0; end
    else exp_v = int'(v);
    // window index k is on the ADC pins at cycle 2 + delay + k after the
    // trigger; the DAC word appears at cycle 8 + delay + int_start + 15 + kick_delay
    exp_at = 8 + s_tdly + s_istart + MAX_INT + s_kdly;
    // drive the train
    dac_seen_at = -1; dac_val = 8192; dac_changes = 0; amp_first = -1; amp_count = 0;
    n = 0;
    @(negedge clk) trig_in = 1;
    while (n < 260 + s_tdly + s_kdly) begin
      int k;
      k = n - (2 + s_tdly);
      for (int ch = 0; ch < N_CH; ch++)
        adc_in[ch] = {13'(wave(ch, k)), 1'($urandom)};   // LSB is noise
      if (n == 20) trig_in = 0;
      @(negedge clk); n++;
      if (dac_update) begin
        dac_changes++;
        if (dac_seen_at < 0) begin dac_seen_at = n; dac_val = int'(dac_code); end
      end
      if (amp_trig) begin amp_count++; if (amp_first < 0) amp_first = n; end
    end
    repeat (s_klen + 20) @(negedge clk);
  endtask

  task automatic train(string name);
    int exp_at, exp_v; bit exp_sat, kicks;
    fire_train(exp_at, exp_v, exp_sat, kicks);
    chk(fb_on == model_fb_on, {name, ": fb_on"});
    if (kicks) begin
      chk(dac_seen_at == exp_at, $sformatf("%s: DAC at cycle %0d expected %0d", name, dac_seen_at, exp_at));
      chk(dac_val == ((exp_v + 8192) & 16'h3fff), $sformatf("%s: DAC %0d expected %0d", name, dac_val - 8192, exp_v));
      chk(dac_changes == 2, $sformatf("%s: %0d DAC updates", name, dac_changes));
      if (exp_sat) n_sat++;
      $display("%s: kick %0d DAC counts at cycle %0d", name, dac_val - 8192, dac_seen_at);
    end else begin
      chk(dac_seen_at < 0 || dac_val == 8192, $sformatf("%s: unexpected kick %0d", name, dac_val - 8192));
      $display("%s: no kick", name);
    end
    if (s_ampl > 0) begin
      chk(amp_first == 5 + s_tdly + s_amps && amp_count == s_ampl,
          $sformatf("%s: amp trigger at %0d for %0d", name, amp_first, amp_count));
      n_amp++;
    end
  endtask

  initial begin
    int d, base_at, prev_at;
    for (int ch = 0; ch < N_CH; ch++) adc_in[ch] = '0;
    amp_i = '{-400, 300, -500}; amp_q = '{700, 500, 1000}; qamp = 3000; bunch_at = 18;
    n_two = 0; n_sat = 0; n_clamp = 0; n_amp = 0; n_lat = 0; n_base = 0; n_cal = 0; n_res = 0; n_win = 0;
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (10) @(negedge clk);

    wr(R_TRIGDLY, s_tdly);
    wr(R_INTSTART, s_istart);
    wr(R_QSAMPLE, s_qs);
    for (int ch = 0; ch < N_CH; ch++) wr(R_OFFSET0 + 7'(ch), offs[ch] & 16'hffff);
    begin
      int qv;
      qv = wave(6, s_qs) - offs[6];
      load_lut(-qv);
    end

    // ---- 1. latency scan with a constant 2000-count kick ----
    // sequential triggers toggle the kick off and on, as for a running
    // baseline subtraction: each delay point fires an unkicked and a kicked train
    s_const = 2000; wr(R_CONST, s_const);
    set_ctrl(2, 0, 1);
    for (int kd = 0; kd <= 40; kd += 4) begin
      s_kdly = kd; wr(R_KICKDLY, kd);
      for (int t = 0; t < 2; t++) begin
        train($sformatf("latency kick_delay %0d train %0d", kd, t));
        if (model_fb_on) begin
          if (kd == 0) base_at = dac_seen_at;
          chk(dac_seen_at == base_at + kd, $sformatf("latency step: %0d vs %0d + %0d", dac_seen_at, base_at, kd));
          chk(dac_val - 8192 == 2000, "constant kick value");
          n_lat++;
        end else n_base++;
      end
    end
    s_kdly = 0; wr(R_KICKDLY, 0);

    // ---- kicker calibration: constant drive stepped over the DAC range ----
    set_ctrl(2, 0, 0);
    for (int cv = -8000; cv <= 8000; cv += 4000) begin
      s_const = cv; wr(R_CONST, cv & 16'hffff);
      train($sformatf("calibration drive %0d", cv));
      chk(dac_val - 8192 == cv, $sformatf("drive %0d gave %0d", cv, dac_val - 8192));
      n_cal++;
    end

    // ---- 2. resolution scan, single BPM at IPC, 1..15 samples ----
    set_sel(2, 0);
    set_ctrl(1, 0, 0);
    prev_at = -1;
    for (int len = 1; len <= MAX_INT; len++) begin
      s_ilen = len; wr(R_INTLEN, len);
      train($sformatf("resolution int_len %0d", len));
      if (prev_at >= 0) chk(dac_seen_at == prev_at, "kick time depends on integration length");
      prev_at = dac_seen_at;
      n_res++;
    end

    // ---- 3. two-BPM feedback, IPA and IPC, 5 samples ----
    set_sel(0, 2);
    s_ilen = 5; wr(R_INTLEN, 5);
    set_ctrl(1, 1, 0);
    for (int i = 0; i < 4; i++) begin
      amp_i[0] = -400 + 150 * i; amp_q[2] = 1000 - 300 * i;
      train($sformatf("two-BPM train %0d", i));
      n_two++;
    end
    amp_i = '{-400, 300, -500}; amp_q = '{700, 500, 1000};

    // ---- 4. window length: full 164 samples, then 100 ----
    set_ctrl(0, 0, 0);
    train("window 164");
    wr(R_WFADDR, (6 << 8) | (WINDOW_LEN - 2));
    for (int k = WINDOW_LEN - 2; k < WINDOW_LEN; k++) begin
      rd(R_WFDATA, d);
      chk(d == (wave(6, k) & 16'hffff), $sformatf("window sample %0d: %0d expected %0d", k, d, wave(6, k)));
    end
    n_win++;
    // a shorter window: samples beyond it keep the previous train's values
    wr(R_WINLEN, 100);
    qamp = 2000;
    train("window 100");
    wr(R_WFADDR, (6 << 8) | 98);
    for (int k = 98; k < 102; k++) begin
      rd(R_WFDATA, d);
      if (k < 100) chk(d == (wave(6, k) & 16'hffff), $sformatf("short window sample %0d", k));
      else begin
        int old;
        qamp = 3000; old = wave(6, k); qamp = 2000;
        chk(d == (old & 16'hffff), $sformatf("sample %0d beyond short window %0d expected %0d", k, d, old));
      end
    end
    qamp = 3000;
    n_win++;
    rd(R_STATUS, d); chk(d == 22 + 5 + MAX_INT + 4 + 2, $sformatf("trigger count %0d", d));

    chk(n_lat == 11 && n_base == 11, "latency scan incomplete");
    chk(n_cal == 5, "calibration scan incomplete");
    chk(n_res == MAX_INT, "resolution scan incomplete");
    chk(n_two == 4, "two-BPM trains incomplete");
    chk(n_win == 2, "window workloads incomplete");
    $display("workloads: latency %0d (+%0d unkicked) calibration %0d resolution %0d two-BPM %0d window %0d", n_lat, n_base, n_cal, n_res, n_two, n_win);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
