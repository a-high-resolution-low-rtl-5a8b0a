// tb_ctrl_regs: feeds command bytes straight into the decoder. Checks every
// configuration field after its write, read-back of each register, LUT
// writes with table select and address auto-increment, waveform-sample
// reads with index auto-increment, offsets, trim-DAC values and status.
// The transmitter is modelled as busy for 5 cycles after each start.
module tb_ctrl_regs;
  import font_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] rx_data = '0, tx_data;
  logic rx_valid = 0, tx_start, tx_busy;
  logic [15:0] trig_count = 16'd1234, sat_count = 16'd77;
  cfg_t cfg;
  logic signed [SMP_W-1:0]  offset   [N_CH];
  logic [TRIM_W-1:0]        trim_dac [N_CH];
  logic [N_LUT-1:0]         lut_we;
  logic [LUT_AW-1:0]        lut_waddr;
  logic signed [LUT_DW-1:0] lut_wdata;
  logic [2:0]               wf_rch;
  logic [IDX_W-1:0]         wf_raddr;
  logic [SMP_W-1:0]         wf_rdata;

  ctrl_regs dut (.*);

  // waveform memory model: sample = 100*channel + index, one-cycle read
  always @(posedge clk) wf_rdata <= SMP_W'(100 * int'(wf_rch) + int'(wf_raddr));

  int busy_cnt = 0;
  assign tx_busy = busy_cnt != 0;
  int txq [$];
  always @(posedge clk) begin
    if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
    if (tx_start) begin
      if (busy_cnt != 0) begin failures++; $display("FAIL start while busy"); end
      busy_cnt <= 5;
      txq.push_back(int'(tx_data));
    end
  end

  // LUT write monitor
  int lut_log [$];
  always @(posedge clk)
    for (int t = 0; t < N_LUT; t++)
      if (lut_we[t]) lut_log.push_back((t << 28) | (int'(lut_waddr) << 16) | int'($unsigned(lut_wdata)));

  task automatic send(int b);
    @(negedge clk) begin rx_data = 8'(b); rx_valid = 1; end
    @(negedge clk) rx_valid = 0;
    repeat (3) @(negedge clk);
  endtask
  task automatic wr(logic [6:0] a, int d);
    send({1'b0, a}); send((d >> 8) & 255); send(d & 255);
  endtask
  task automatic rd(logic [6:0] a, output int d);
    txq.delete();
    send({1'b1, a});
    repeat (30) @(negedge clk);
    if (txq.size() != 2) begin failures++; $display("FAIL read %0d bytes", txq.size()); d = -1; end
    else d = (txq[0] << 8) | txq[1];
  endtask
  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int d;
    repeat (3) @(posedge clk);
    rst = 0;
    chk(cfg.mode == MODE_OFF, "reset mode is off");
    wr(R_CTRL, 16'h000d);     // feedback, two-BPM, toggle
    chk(cfg.mode == MODE_FEEDBACK && cfg.two_bpm && cfg.toggle, "ctrl");
    wr(R_SEL, 16'h0008);      // A = IPA, B = IPC
    chk(cfg.sel_a == BPM_IPA && cfg.sel_b == BPM_IPC, "sel");
    wr(R_TRIGDLY, 16'h1234);  chk(cfg.trig_delay == 16'h1234, "trig delay");
    chk(cfg.win_len == 8'(WINDOW_LEN), "win len default");
    wr(R_WINLEN, 16'd100); chk(cfg.win_len == 8'd100, "win len");
    rd(R_WINLEN, d); chk(d == 100, $sformatf("rd win len %0d", d));
    wr(R_WINLEN, 16'(WINDOW_LEN));
    wr(R_INTSTART, 33);       chk(cfg.int_start == 33, "int start");
    wr(R_INTLEN, 11);         chk(cfg.int_len == 11, "int len");
    wr(R_INTLEN, 0);          chk(cfg.int_len == 1, "int len 0 -> 1");
    wr(R_QSAMPLE, 30);        chk(cfg.q_sample == 30, "q sample");
    wr(R_KICKDLY, 9);         chk(cfg.kick_delay == 9, "kick delay");
    wr(R_KICKLEN, 300);       chk(cfg.kick_len == 300, "kick len");
    wr(R_CONST, 2000);        chk(cfg.const_val == 2000, "const");
    wr(R_COFF, 16'h3f00);     chk(cfg.c_off == -256, "c offset");
    wr(R_AMPSTART, 5);        chk(cfg.amp_start == 5, "amp start");
    wr(R_AMPLEN, 60);         chk(cfg.amp_len == 60, "amp len");
    for (int i = 0; i < N_CH; i++) begin
      wr(R_OFFSET0 + 7'(i), 16'(-10 * i - 3));
      wr(R_TRIM0 + 7'(i), 1000 + i);
    end
    for (int i = 0; i < N_CH; i++) begin
      chk(int'(offset[i]) == -10 * i - 3, $sformatf("offset %0d", i));
      chk(int'(trim_dac[i]) == 1000 + i, $sformatf("trim %0d", i));
    end
    // read-back
    rd(R_CTRL, d);     chk(d == 16'h000d, $sformatf("rd ctrl %h", d));
    rd(R_TRIGDLY, d);  chk(d == 16'h1234, $sformatf("rd trigdly %h", d));
    rd(R_KICKLEN, d);  chk(d == 300, $sformatf("rd kicklen %0d", d));
    rd(R_COFF, d);     chk(d == 16'hff00, $sformatf("rd coff %h", d));
    rd(R_OFFSET0 + 7'd2, d); chk(d == 16'hffe9, $sformatf("rd offset2 %h", d));
    rd(R_TRIM0 + 7'd6, d);   chk(d == 1006, $sformatf("rd trim6 %0d", d));
    rd(R_STATUS, d);   chk(d == 1234, $sformatf("rd status %0d", d));
    rd(R_SATCNT, d);   chk(d == 77, $sformatf("rd satcnt %0d", d));
    // LUT: table 2, address 0x7fe, two entries, auto-increment
    lut_log.delete();
    wr(R_LUTADDR, (2 << 12) | 12'h7fe);
    wr(R_LUTDATA, 16'h1111);
    wr(R_LUTDATA, 16'hbeef);
    chk(lut_log.size() == 2, $sformatf("%0d LUT writes", lut_log.size()));
    if (lut_log.size() == 2) begin
      chk(lut_log[0] == ((2 << 28) | (12'h7fe << 16) | 16'h1111), $sformatf("lut write 0 %h", lut_log[0]));
      chk(lut_log[1] == ((2 << 28) | (12'h7ff << 16) | 16'hbeef), $sformatf("lut write 1 %h", lut_log[1]));
    end
    rd(R_LUTADDR, d);  chk(d == ((2 << 12) | 12'h800), $sformatf("rd lutaddr %h", d));
    // waveform read with auto-increment: channel 3, samples 40, 41, 42
    wr(R_WFADDR, (3 << 8) | 40);
    for (int k = 0; k < 3; k++) begin
      rd(R_WFDATA, d); chk(d == 300 + 40 + k, $sformatf("wf sample %0d", d));
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
