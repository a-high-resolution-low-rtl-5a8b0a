// waveform_buffer: capture memory for the digitised sampling window.
//
// While the window is open, the 13-bit samples of all channels (LSB already
// dropped, before offset removal) are written at the window sample index, so
// the last window's full I, Q and q waveforms can be read out by the control
// link. One wide word per sample holds every channel. Synchronous read:
// rdata is the sample of channel rch at index raddr one cycle later.
// The 164-sample window follows the original system; the readout path is
// this design's choice.
module waveform_buffer
  import font_pkg::*;
#(
  parameter int N     = N_CH,
  parameter int DEPTH = WINDOW_LEN,
  parameter int W     = SMP_W
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [IDX_W-1:0]     waddr,
  input  logic [W-1:0]         wdata [N],
  input  logic [2:0]           rch,
  input  logic [IDX_W-1:0]     raddr,
  output logic [W-1:0]         rdata
);

  logic [N-1:0][W-1:0] mem [DEPTH];
  logic [N-1:0][W-1:0] wword;

  always_comb
    for (int i = 0; i < N; i++) wword[i] = wdata[i];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr] <= wword;
    if (int'(raddr) < DEPTH && int'(rch) < N) rdata <= mem[raddr][rch];
    else rdata <= '0;
  end

endmodule
