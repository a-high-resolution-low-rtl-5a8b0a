// uart_rx: RS-232 receiver, 8 data bits, no parity, one stop bit, LSB first.
//
// rxd is synchronised with two flops. A falling edge starts a frame; the
// start bit is checked at its middle, each data bit is sampled at its middle
// (CLKS_PER_BIT cycles apart) and valid pulses for one cycle with the byte
// once the stop bit is seen high. A frame with a low stop bit is dropped.
// The default 3099 clocks per bit gives 115200 baud from the 357 MHz clock;
// framing and rate are this design's choices.
module uart_rx #(
  parameter int CLKS_PER_BIT = 3099
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);
  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;
  rstate_e st;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync <= 2'b11; st <= R_IDLE; cnt <= '0; bitn <= '0; sh <= '0;
      data <= '0; valid <= 1'b0;
    end else begin
      sync  <= {sync[0], rxd};
      valid <= 1'b0;
      unique case (st)
        R_IDLE: if (!sync[1]) begin
          st <= R_START; cnt <= CW'(CLKS_PER_BIT / 2);
        end
        R_START: if (cnt == 0) begin
          if (!sync[1]) begin st <= R_DATA; cnt <= CW'(CLKS_PER_BIT - 1); bitn <= '0; end
          else st <= R_IDLE;
        end else cnt <= cnt - 1'b1;
        R_DATA: if (cnt == 0) begin
          sh  <= {sync[1], sh[7:1]};
          cnt <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) st <= R_STOP;
          bitn <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        R_STOP: if (cnt == 0) begin
          st <= R_IDLE;
          if (sync[1]) begin data <= sh; valid <= 1'b1; end
        end else cnt <= cnt - 1'b1;
        default: st <= R_IDLE;
      endcase
    end
  end

endmodule
