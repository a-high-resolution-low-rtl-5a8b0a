// sample_integrator: real-time integration of one I or Q waveform.
//
// On every fast-clock edge on which gate is high the newest sample is added
// to the running sum, exactly as the original firmware integrates the samples
// around the waveform peak. clear (asserted at the first sample of each
// window) restarts the sum; if gate is also high on that cycle the sample
// becomes the first term. The sum is available one cycle after the last
// gated sample and is held until the next clear. Width: IN_W + 4 bits, enough
// for 15 full-scale samples (the width is this design's choice).
module sample_integrator
  import font_pkg::*;
#(
  parameter int IN_W = COR_W,
  parameter int OUT_W = IN_W + 4
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   clear,
  input  logic                   gate,
  input  logic signed [IN_W-1:0] din,
  output logic signed [OUT_W-1:0] sum
);

  always_ff @(posedge clk) begin
    if (rst) sum <= '0;
    else if (clear) sum <= gate ? OUT_W'(din) : '0;
    else if (gate) sum <= sum + OUT_W'(din);
  end

endmodule
