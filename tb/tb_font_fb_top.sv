// tb_font_fb_top: end-to-end test of the feedback firmware at its default
// parameters (115200-baud control link at 3099 clocks per bit).
//
// The bench configures the firmware over its serial input, loads the four
// charge LUTs for the charges it will use, and fires two-bunch trains. For
// each train it synthesises I, Q and q waveforms for the three BPMs and the
// reference cavity (baselines, a decaying bunch-1 pulse and a bunch-2 pulse
// 100 samples later), recomputes independently the baseline-corrected
// integrals, the LUT lookup and V = c - (sum S_i*L_i >> 16), and checks the
// DAC word and the clock cycle at which it appears. Trains cover single-BPM
// (IPC, 10 samples) and two-BPM (IPA+IPC, 5 samples) feedback, 1- and
// 15-sample integration with identical output time, constant drive with and
// without added delay, feedback off, per-train on/off toggling, DAC
// saturation, charge clamping at the LUT end, the amplifier trigger gate,
// trim-DAC settings and waveform read-back over the serial output. Each
// mechanism is counted; one that never happened counts as a failure.
module tb_font_fb_top;
  import font_pkg::*;
  localparam int CPB = 3099;             // clocks per serial bit (default)
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic trig_in = 0, uart_rxd = 1, uart_txd, dac_update, amp_trig, fb_on;
  logic [ADC_W-1:0]  adc_in [N_CH];
  logic [DAC_W-1:0]  dac_code;
  logic [TRIM_W-1:0] trim_dac [N_CH];

  font_fb_top dut (.*);

  // ---------------- mechanism counters ----------------
  int n_single, n_two, n_const, n_off, n_skip, n_delay, n_sat, n_clamp, n_len1, n_len15,
      n_amp, n_wf, n_trim, n_readback;

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
    int d;
    for (int ch = 0; ch < N_CH; ch++) adc_in[ch] = '0;
    amp_i = '{-400, 300, -500}; amp_q = '{700, 500, 1000}; qamp = 3000; bunch_at = 18;
    n_single = 0; n_two = 0; n_const = 0; n_off = 0; n_skip = 0; n_delay = 0; n_sat = 0;
    n_clamp = 0; n_len1 = 0; n_len15 = 0; n_amp = 0; n_wf = 0; n_trim = 0; n_readback = 0;
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (10) @(negedge clk);

    // ---- common settings ----
    wr(R_TRIGDLY, s_tdly);
    wr(R_INTSTART, s_istart);
    wr(R_QSAMPLE, s_qs);
    for (int ch = 0; ch < N_CH; ch++) wr(R_OFFSET0 + 7'(ch), offs[ch] & 16'hffff);
    wr(R_TRIM0 + 7'd2, 16'd40000);
    chk(trim_dac[2] == 16'd40000, "trim DAC value"); n_trim++;
    s_amps = 10; s_ampl = 40; wr(R_AMPSTART, s_amps); wr(R_AMPLEN, s_ampl);
    rd(R_INTSTART, d); chk(d == s_istart, $sformatf("read-back int_start %0d", d)); n_readback++;

    // charge of the nominal trains: find its LUT address with the same model
    begin
      int qv;
      qv = wave(6, s_qs) - offs[6];
      load_lut(-qv);
    end

    // ---- feedback off ----
    train("off");
    n_off++;

    // ---- single-BPM feedback at IPC, 10 samples ----
    set_sel(2, 0);
    s_ilen = 10; wr(R_INTLEN, 10);
    set_ctrl(1, 0, 0);
    train("single IPC 10");
    n_single++;

    // ---- 1 and 15 samples: same output time ----
    s_ilen = 1;  wr(R_INTLEN, 1);  train("single IPC 1");  n_len1++;
    s_ilen = 15; wr(R_INTLEN, 15); train("single IPC 15"); n_len15++;

    // ---- two-BPM feedback, IPA and IPC, 5 samples, offset c ----
    set_sel(0, 2);
    s_ilen = 5; wr(R_INTLEN, 5);
    s_coff = -300; wr(R_COFF, s_coff & 16'hffff);
    set_ctrl(1, 1, 0);
    train("two-BPM IPA+IPC 5");
    n_two++;

    // ---- constant drive of 2000 counts, then with 10 cycles added delay ----
    s_const = 2000; wr(R_CONST, s_const);
    set_ctrl(2, 1, 0);
    train("constant");
    n_const++;
    s_kdly = 10; wr(R_KICKDLY, s_kdly);
    train("constant delayed");
    n_delay++;
    s_kdly = 0; wr(R_KICKDLY, 0);

    // ---- alternate trains with feedback toggled off/on ----
    set_ctrl(1, 1, 1);
    train("toggle a");
    train("toggle b");
    n_skip++;
    set_ctrl(1, 1, 0);

    // ---- saturation: large offset c ----
    s_coff = 8100; wr(R_COFF, s_coff);
    amp_q[0] = 3000;
    train("saturating");
    amp_q[0] = 700;
    s_coff = 0; wr(R_COFF, 0);
    rd(R_SATCNT, d); chk(d >= 1, $sformatf("saturation count %0d", d));

    // ---- high charge: q beyond the table, clamps to the last entry ----
    // the saturated q sample (-4096) less a positive baseline offset lies
    // beyond the last table entry
    qamp = 8000;
    offs[6] = 100; wr(R_OFFSET0 + 7'd6, offs[6]);
    load_lut(4095);
    set_sel(2, 0); set_ctrl(1, 0, 0);
    s_ilen = 11; wr(R_INTLEN, 11);
    train("clamped charge");
    qamp = 3000;
    offs[6] = -20; wr(R_OFFSET0 + 7'd6, offs[6] & 16'hffff);

    // ---- waveform read-back: IPC Q (channel 5), samples 18..20 ----
    wr(R_WFADDR, (5 << 8) | 18);
    for (int k = 18; k < 21; k++) begin
      rd(R_WFDATA, d);
      chk(d == (wave(5, k) & 16'hffff), $sformatf("waveform sample %0d: %0d expected %0d", k, d, wave(5, k)));
      n_wf++;
    end

    // ---- mechanism coverage ----
    chk(n_single > 0, "single-BPM mode never ran");
    chk(n_two > 0, "two-BPM mode never ran");
    chk(n_const > 0, "constant drive never ran");
    chk(n_off > 0, "feedback off never ran");
    chk(n_skip > 0, "toggling never ran");
    chk(n_delay > 0, "added delay never ran");
    chk(n_sat > 0, "saturation never happened");
    chk(n_clamp > 0, "charge clamp never happened");
    chk(n_len1 > 0 && n_len15 > 0, "integration lengths 1 and 15 not both run");
    chk(n_amp > 0, "amplifier trigger never checked");
    chk(n_wf > 0 && n_readback > 0, "read-back never ran");
    chk(n_trim > 0, "trim DAC never set");
    $display("mechanisms: single %0d two %0d const %0d off %0d toggle %0d delay %0d sat %0d clamp %0d len1 %0d len15 %0d amp %0d wf %0d",
             n_single, n_two, n_const, n_off, n_skip, n_delay, n_sat, n_clamp, n_len1, n_len15, n_amp, n_wf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
