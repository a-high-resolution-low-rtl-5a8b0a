// adc_frontend: capture of the seven ADC channels and baseline-offset removal.
//
// Every fast-clock cycle the seven 14-bit ADC words (I and Q of IPA, IPB, IPC
// and the reference-cavity charge q) are registered. The least significant
// bit is dropped, as on the original board, because it sits at the noise
// level; the 13-bit result is both handed to waveform capture (smp_raw) and,
// one cycle later, has a programmable per-channel constant subtracted to
// remove the position-independent baseline of each waveform (smp).
//
// Timing: smp_raw is valid 1 cycle after adc_in, smp 2 cycles after adc_in.
// The offset-corrected value is kept at 14 bits so that the subtraction can
// never wrap; that width, the two register stages and the two's-complement
// ADC format are this design's choices.
module adc_frontend
  import font_pkg::*;
#(
  parameter int N = N_CH
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [ADC_W-1:0]        adc_in  [N],
  input  logic signed [SMP_W-1:0] offset  [N],
  output logic signed [SMP_W-1:0] smp_raw [N],
  output logic signed [COR_W-1:0] smp     [N]
);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) begin
        smp_raw[i] <= '0;
        smp[i]     <= '0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        smp_raw[i] <= signed'(adc_in[i][ADC_W-1:1]);
        smp[i]     <= COR_W'(smp_raw[i]) - COR_W'(offset[i]);
      end
    end
  end

endmodule
