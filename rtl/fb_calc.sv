// fb_calc: the feedback kick calculation V = c - G*y/M.
//
// The bunch position is y = I'/(k q) with I' = I cos(theta) + Q sin(theta).
// Each of the four feedback terms (I and Q of input A, I and Q of input B)
// is an integrated sum multiplied by its charge-LUT value C_i/q, where C_i
// already holds cos or sin(theta), 1/k, the gain G, 1/M and, for two-BPM
// feedback, the interpolation weight of that BPM. Hence
//   V = c_off - ((S0*L0 + S1*L1 + S2*L2 + S3*L3) >>> FRAC)
// saturated to the signed DAC range. The mode selects this feedback value,
// a constant drive (const_val, used to calibrate the kicker and to measure
// latency) or zero. Mode, c_off and const_val are sampled with start.
//
// Pipeline (FB_PIPE = 3): start -> products -> pair sums -> total, scale,
// offset, saturate. v_valid pulses 3 cycles after start together with v_out
// and sat. The shift floors (arithmetic right shift); widths, rounding and
// saturation are this design's choices, the equation is the original one.
module fb_calc
  import font_pkg::*;
#(
  parameter int SW = SUM_W,
  parameter int LW = LUT_DW,
  parameter int FR = FRAC,
  parameter int DW = DAC_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic signed [SW-1:0] sums  [N_LUT],
  input  logic signed [LW-1:0] coef  [N_LUT],
  input  logic signed [DW-1:0] c_off,
  input  kick_mode_e           mode,
  input  logic signed [DW-1:0] const_val,
  output logic signed [DW-1:0] v_out,
  output logic                 v_valid,
  output logic                 sat
);

  localparam int PW = SW + LW;     // product
  localparam int TW = PW + 2;      // sum of four products

  logic signed [PW-1:0] prod [N_LUT];
  logic signed [PW:0]   pair [2];
  logic [1:0]           vld;
  kick_mode_e           mode_q [2];
  logic signed [DW-1:0] coff_q [2];
  logic signed [DW-1:0] cval_q [2];

  logic signed [TW-1:0] total;
  logic signed [TW-FR:0] v_wide;
  localparam logic signed [TW-FR:0] VMAX = (TW-FR+1)'((2**(DW-1)) - 1);
  localparam logic signed [TW-FR:0] VMIN = -(TW-FR+1)'(2**(DW-1));

  always_comb begin
    total  = TW'(pair[0]) + TW'(pair[1]);
    v_wide = (TW-FR+1)'(coff_q[1]) - (TW-FR+1)'(total >>> FR);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      vld     <= '0;
      v_valid <= 1'b0;
      v_out   <= '0;
      sat     <= 1'b0;
      for (int i = 0; i < N_LUT; i++) prod[i] <= '0;
      pair[0] <= '0; pair[1] <= '0;
      for (int i = 0; i < 2; i++) begin
        mode_q[i] <= MODE_OFF; coff_q[i] <= '0; cval_q[i] <= '0;
      end
    end else begin
      // stage 1: products
      vld[0] <= start;
      if (start) begin
        for (int i = 0; i < N_LUT; i++) prod[i] <= PW'(sums[i]) * PW'(coef[i]);
        mode_q[0] <= mode; coff_q[0] <= c_off; cval_q[0] <= const_val;
      end
      // stage 2: pair sums
      vld[1] <= vld[0];
      if (vld[0]) begin
        pair[0] <= (PW+1)'(prod[0]) + (PW+1)'(prod[1]);
        pair[1] <= (PW+1)'(prod[2]) + (PW+1)'(prod[3]);
        mode_q[1] <= mode_q[0]; coff_q[1] <= coff_q[0]; cval_q[1] <= cval_q[0];
      end
      // stage 3: total, scale, offset, saturate, mode
      v_valid <= vld[1];
      if (vld[1]) begin
        sat <= 1'b0;
        unique case (mode_q[1])
          MODE_FEEDBACK: begin
            if (v_wide > VMAX)      begin v_out <= DW'(VMAX); sat <= 1'b1; end
            else if (v_wide < VMIN) begin v_out <= DW'(VMIN); sat <= 1'b1; end
            else                          v_out <= DW'(v_wide);
          end
          MODE_CONSTANT: v_out <= cval_q[1];
          default:       v_out <= '0;
        endcase
      end
    end
  end

  // fixed pipeline: a result follows every start after exactly FB_PIPE cycles
  a_latency: assert property (@(posedge clk) disable iff (rst) start |-> ##3 v_valid);

endmodule
