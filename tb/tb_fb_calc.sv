// tb_fb_calc: random integrated sums and LUT values in feedback mode, plus
// constant-drive and off modes and values driven past both DAC limits.
// Each result is compared with V = c - floor(sum(S_i*L_i) / 2^FRAC), clipped
// to the signed 14-bit range, and must appear exactly 3 cycles after start.
module tb_fb_calc;
  import font_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int n_sat = 0, n_const = 0, n_off = 0, n_fb = 0;

  logic start = 0;
  logic signed [SUM_W-1:0]  sums [N_LUT];
  logic signed [LUT_DW-1:0] coef [N_LUT];
  logic signed [DAC_W-1:0]  c_off, const_val, v_out;
  kick_mode_e mode;
  logic v_valid, sat;

  fb_calc dut (.*);

  function automatic longint floordiv(longint a, int fr);
    longint d = longint'(1) << fr;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  task automatic one(kick_mode_e m, int scale);
    longint acc, v; int exp_v; bit exp_sat; int lat;
    for (int i = 0; i < N_LUT; i++) begin
      sums[i] = SUM_W'($urandom_range(0, 2**SUM_W - 1));
      coef[i] = LUT_DW'($urandom_range(0, 2**LUT_DW - 1));
      if (scale == 0) begin sums[i] = sums[i] >>> 6; coef[i] = coef[i] >>> 6; end
    end
    c_off = DAC_W'($urandom); const_val = DAC_W'($urandom); mode = m;
    acc = 0;
    for (int i = 0; i < N_LUT; i++) acc += longint'(sums[i]) * longint'(coef[i]);
    v = longint'(c_off) - floordiv(acc, FRAC);
    exp_sat = 0;
    if (v > 8191) begin v = 8191; exp_sat = 1; end
    if (v < -8192) begin v = -8192; exp_sat = 1; end
    case (m)
      MODE_FEEDBACK: exp_v = int'(v);
      MODE_CONSTANT: begin exp_v = int'(const_val); exp_sat = 0; end
      default:       begin exp_v = 0; exp_sat = 0; end
    endcase
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // inputs change right after start: the result must use the sampled values
    for (int i = 0; i < N_LUT; i++) begin sums[i] = '0; coef[i] = '0; end
    c_off = '0; const_val = '0; mode = MODE_OFF;
    lat = 1;
    while (!v_valid && lat < 10) begin @(negedge clk); lat++; end
    checks += 3;
    if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
    if (int'(v_out) != exp_v) begin failures++; $display("FAIL mode %0d v %0d exp %0d", m, v_out, exp_v); end
    if (sat != exp_sat) begin failures++; $display("FAIL sat %0d exp %0d", sat, exp_sat); end
    if (exp_sat) n_sat++;
    if (m == MODE_CONSTANT) n_const++; else if (m == MODE_OFF) n_off++; else n_fb++;
  endtask

  initial begin
    for (int i = 0; i < N_LUT; i++) begin sums[i] = '0; coef[i] = '0; end
    c_off = '0; const_val = '0; mode = MODE_OFF;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 200; r++) one(MODE_FEEDBACK, 0);
    for (int r = 0; r < 100; r++) one(MODE_FEEDBACK, 1);
    for (int r = 0; r < 30; r++) one(MODE_CONSTANT, r % 2);
    for (int r = 0; r < 30; r++) one(MODE_OFF, r % 2);
    checks++;
    if (n_sat == 0 || n_sat == 300) begin failures++; $display("FAIL saturation cases %0d", n_sat); end
    $display("feedback %0d constant %0d off %0d saturated %0d", n_fb, n_const, n_off, n_sat);
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
