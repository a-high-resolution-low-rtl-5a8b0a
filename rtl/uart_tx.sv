// uart_tx: RS-232 transmitter, 8 data bits, no parity, one stop bit, LSB first.
//
// A start pulse while idle latches data and sends start bit, eight data bits
// and stop bit, each CLKS_PER_BIT cycles long. busy is high from the cycle
// after start until the stop bit has been sent; txd idles high.
// Framing and rate (default 115200 baud at 357 MHz) are this design's choices.
module uart_tx #(
  parameter int CLKS_PER_BIT = 3099
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] data,
  input  logic       start,
  output logic       txd,
  output logic       busy
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);
  logic [9:0]    frame;   // stop, data[7:0], start
  logic [3:0]    bitn;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      frame <= '1; bitn <= '0; cnt <= '0; busy <= 1'b0; txd <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        frame <= {1'b1, data, 1'b0};
        busy  <= 1'b1;
        bitn  <= '0;
        cnt   <= CW'(CLKS_PER_BIT - 1);
        txd   <= 1'b0;
      end
    end else begin
      if (cnt == 0) begin
        cnt <= CW'(CLKS_PER_BIT - 1);
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          txd  <= 1'b1;
        end else begin
          bitn <= bitn + 1'b1;
          txd  <= frame[bitn + 4'd1];
        end
      end else cnt <= cnt - 1'b1;
    end
  end

endmodule
