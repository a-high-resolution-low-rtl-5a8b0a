// tb_waveform_buffer: writes a full 164-sample window of random samples for
// all seven channels, then reads every channel/sample back (one cycle read
// latency) and checks it; writes with we low must not change the contents.
module tb_waveform_buffer;
  import font_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [IDX_W-1:0] waddr = '0, raddr = '0;
  logic [SMP_W-1:0] wdata [N_CH];
  logic [2:0] rch = '0;
  logic [SMP_W-1:0] rdata;
  logic [SMP_W-1:0] model [WINDOW_LEN][N_CH];

  waveform_buffer dut (.*);

  initial begin
    for (int c = 0; c < N_CH; c++) wdata[c] = '0;
    for (int k = 0; k < WINDOW_LEN; k++) begin
      @(negedge clk);
      we = 1; waddr = IDX_W'(k);
      for (int c = 0; c < N_CH; c++) begin wdata[c] = SMP_W'($urandom); model[k][c] = wdata[c]; end
    end
    @(negedge clk) we = 0;
    // writes with we low are ignored
    for (int k = 0; k < 10; k++) begin
      @(negedge clk); waddr = IDX_W'(k);
      for (int c = 0; c < N_CH; c++) wdata[c] = SMP_W'($urandom);
    end
    for (int c = 0; c < N_CH; c++)
      for (int k = 0; k < WINDOW_LEN; k++) begin
        @(negedge clk) begin rch = 3'(c); raddr = IDX_W'(k); end
        @(negedge clk);
        checks++;
        if (rdata != model[k][c]) begin failures++; $display("FAIL ch%0d s%0d %0d exp %0d", c, k, rdata, model[k][c]); end
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
