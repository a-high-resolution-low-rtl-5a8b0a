// tb_adc_frontend: random ADC words and offsets; checks the LSB drop one
// cycle after capture and the offset subtraction one cycle later against a
// reference computed here from the stimulus.
module tb_adc_frontend;
  import font_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ADC_W-1:0]        adc_in  [N_CH];
  logic signed [SMP_W-1:0] offset  [N_CH];
  logic signed [SMP_W-1:0] smp_raw [N_CH];
  logic signed [COR_W-1:0] smp     [N_CH];

  adc_frontend dut (.*);

  logic [ADC_W-1:0] hist [3][N_CH];   // adc_in of the last cycles
  initial begin
    for (int i = 0; i < N_CH; i++) begin adc_in[i] = '0; offset[i] = '0; end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      // check outputs produced by earlier inputs
      if (c >= 2) for (int i = 0; i < N_CH; i++) begin
        int raw1, raw2, exp_cor;
        raw1 = $signed(hist[0][i]) >>> 1;          // input of previous cycle
        raw2 = $signed(hist[1][i]) >>> 1;          // two cycles ago
        exp_cor = raw2 - int'(offset[i]);
        checks += 2;
        if (int'(smp_raw[i]) != raw1) begin failures++; $display("raw ch%0d %0d exp %0d", i, smp_raw[i], raw1); end
        if (int'(smp[i]) != exp_cor) begin failures++; $display("cor ch%0d %0d exp %0d", i, smp[i], exp_cor); end
      end
      hist[1] = hist[0];
      for (int i = 0; i < N_CH; i++) begin
        adc_in[i] = ADC_W'($urandom);
        if (c % 50 == 0) offset[i] = SMP_W'($urandom);
        hist[0][i] = adc_in[i];
      end
      // offsets only change when the pipeline is refilled
      if (c % 50 == 0) begin
        @(negedge clk); hist[1] = hist[0];
        @(negedge clk); hist[1] = hist[0];
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
