// charge_lut: block-RAM table of C_i/q addressed by the bunch charge.
//
// Division by the bunch charge is too slow for the feedback latency, so the
// charge sample addresses a table preloaded with C_i/q, where C_i folds in the
// BPM phase rotation, position calibration, kicker calibration and feedback
// gain. Four instances exist, one per feedback term. Entries are signed
// fixed point scaled by 2^FRAC. One write port (loaded over the control link)
// and one synchronous read port: rdata is valid one cycle after raddr.
// Depth 4096 and width 16 bits are this design's choices.
module charge_lut
  import font_pkg::*;
#(
  parameter int AW = LUT_AW,
  parameter int DW = LUT_DW
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic signed [DW-1:0] wdata,
  input  logic [AW-1:0]        raddr,
  output logic signed [DW-1:0] rdata
);

  logic signed [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
