// tb_bpm_mux: every select combination in single- and two-BPM mode with
// random samples; expected outputs are picked from the channel table here.
module tb_bpm_mux;
  import font_pkg::*;
  int checks = 0, failures = 0;
  logic signed [COR_W-1:0] smp [N_CH];
  bpm_e sel_a, sel_b;
  logic two_bpm;
  logic signed [COR_W-1:0] mux_out [N_LUT];

  bpm_mux dut (.*);

  function automatic int expect_ch(int bpm, int q);   // channel index or -1
    if (bpm > 2) return -1;
    return 2 * bpm + q;
  endfunction

  initial begin
    for (int r = 0; r < 20; r++)
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 4; b++)
          for (int m = 0; m < 2; m++) begin
            int e [4];
            for (int i = 0; i < N_CH; i++) smp[i] = COR_W'($urandom);
            sel_a = bpm_e'(a); sel_b = bpm_e'(b); two_bpm = m[0];
            #1;
            e[0] = expect_ch(a, 0) < 0 ? 0 : int'(smp[expect_ch(a, 0)]);
            e[1] = expect_ch(a, 1) < 0 ? 0 : int'(smp[expect_ch(a, 1)]);
            e[2] = (m == 0 || expect_ch(b, 0) < 0) ? 0 : int'(smp[expect_ch(b, 0)]);
            e[3] = (m == 0 || expect_ch(b, 1) < 0) ? 0 : int'(smp[expect_ch(b, 1)]);
            for (int k = 0; k < 4; k++) begin
              checks++;
              if (int'(mux_out[k]) != e[k]) begin
                failures++;
                $display("FAIL a=%0d b=%0d m=%0d out%0d=%0d exp %0d", a, b, m, k, mux_out[k], e[k]);
              end
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
