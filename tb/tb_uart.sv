// tb_uart: transmitter looped back into the receiver at 16 clocks per bit.
// Checks every byte arrives intact, that a frame lasts 10 bit times, that
// the transmitted line levels match the 8N1 frame at each bit centre, and
// that a frame with a broken stop bit is dropped by the receiver.
module tb_uart;
  localparam int CPB = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] tx_data = '0, rx_data;
  logic start = 0, txd, busy, rx_valid;
  logic rxd;
  logic force_line = 0, forced = 1;

  assign rxd = force_line ? forced : txd;

  uart_tx #(.CLKS_PER_BIT(CPB)) u_tx (.clk, .rst, .data(tx_data), .start, .txd, .busy);
  uart_rx #(.CLKS_PER_BIT(CPB)) u_rx (.clk, .rst, .rxd, .data(rx_data), .valid(rx_valid));

  int got [$];
  always @(posedge clk) if (rx_valid) got.push_back(int'(rx_data));

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 60; n++) begin
      int b, busy_cyc;
      logic [9:0] frame;
      b = (n < 2) ? (n == 0 ? 8'h00 : 8'hff) : $urandom_range(0, 255);
      frame = {1'b1, 8'(b), 1'b0};
      @(negedge clk) begin tx_data = 8'(b); start = 1; end
      @(negedge clk) start = 0;
      busy_cyc = 1;
      // sample the line at each bit centre
      for (int k = 0; k < 10; k++) begin
        repeat (k == 0 ? CPB / 2 - 1 : CPB) @(negedge clk);
        busy_cyc += (k == 0 ? CPB / 2 - 1 : CPB);
        checks++;
        if (txd != frame[k]) begin failures++; $display("FAIL byte %02x bit %0d", b, k); end
      end
      while (busy) begin @(negedge clk); busy_cyc++; end
      checks++;
      if (busy_cyc - 1 != 10 * CPB) begin failures++; $display("FAIL frame %0d cycles", busy_cyc); end
      repeat (CPB) @(negedge clk);
      checks++;
      if (got.size() != 1 || got[0] != b) begin
        failures++; $display("FAIL rx got %p exp %02x", got, b);
      end
      got.delete();
    end
    // broken stop bit: start + 8 zero bits + low stop bit
    @(negedge clk) begin force_line = 1; forced = 0; end
    repeat (10 * CPB) @(negedge clk);
    forced = 1;
    repeat (3 * CPB) @(negedge clk);
    force_line = 0;
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL framing error accepted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
