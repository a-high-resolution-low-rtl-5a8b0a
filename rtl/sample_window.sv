// sample_window: trigger delay and sampling-window sequencer.
//
// A rising edge on trig_in (after a two-flop synchroniser) starts a delay of
// trig_delay cycles; the window then opens and smp_idx counts 0..win_len-1,
// one sample per fast-clock cycle. win_len is set at run time; 0 or a value
// above WLEN gives the full WLEN samples. From the index it decodes
//   int_gate   - the sample lies in [int_start, int_start+int_len-1],
//   q_strobe   - the sample is the one used for charge normalisation,
//   calc_start - index int_start+MAX_INT, i.e. a fixed time after the start
//                of integration whatever int_len is, so the kick leaves at
//                the same time for any integration length up to MAX_INT.
// Following the original system the window is 164 samples and integration
// is limited to 15 samples. The synchroniser, rising-edge detection and
// ignoring triggers while a window is running are this design's choices.
// All outputs are registered and aligned with each other.
module sample_window
  import font_pkg::*;
#(
  parameter int WLEN = WINDOW_LEN,
  parameter int MAXI = MAX_INT
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             trig_in,
  input  logic [15:0]      trig_delay,
  input  logic [IDX_W-1:0] win_len,
  input  logic [IDX_W-1:0] int_start,
  input  logic [3:0]       int_len,
  input  logic [IDX_W-1:0] q_sample,
  output logic             win_active,
  output logic             win_first,
  output logic [IDX_W-1:0] smp_idx,
  output logic             int_gate,
  output logic             q_strobe,
  output logic             calc_start,
  output logic             trig_seen
);

  typedef enum logic [1:0] {S_IDLE, S_DELAY, S_WINDOW} state_e;
  state_e state;

  logic [2:0]  trig_sync;
  logic [15:0] dly_cnt;
  logic [IDX_W-1:0] idx;
  logic        trig_rise;

  assign trig_rise = trig_sync[1] & ~trig_sync[2];

  // last index of the window
  logic [IDX_W-1:0] last_idx;
  assign last_idx = (win_len == '0 || int'(win_len) > WLEN) ? IDX_W'(WLEN - 1) : win_len - 1'b1;

  // integration end (exclusive) and calculation start, one bit wider
  logic [IDX_W:0] int_end, calc_idx;
  assign int_end  = {1'b0, int_start} + (IDX_W+1)'(int_len);
  assign calc_idx = {1'b0, int_start} + (IDX_W+1)'(MAXI);

  always_ff @(posedge clk) begin
    if (rst) begin
      trig_sync  <= '0;
      state      <= S_IDLE;
      dly_cnt    <= '0;
      idx        <= '0;
      win_active <= 1'b0;
      win_first  <= 1'b0;
      smp_idx    <= '0;
      int_gate   <= 1'b0;
      q_strobe   <= 1'b0;
      calc_start <= 1'b0;
      trig_seen  <= 1'b0;
    end else begin
      trig_sync  <= {trig_sync[1:0], trig_in};
      trig_seen  <= 1'b0;
      win_active <= 1'b0;
      win_first  <= 1'b0;
      int_gate   <= 1'b0;
      q_strobe   <= 1'b0;
      calc_start <= 1'b0;
      unique case (state)
        S_IDLE: if (trig_rise) begin
          trig_seen <= 1'b1;
          dly_cnt   <= trig_delay;
          idx       <= '0;
          state     <= (trig_delay == 16'd0) ? S_WINDOW : S_DELAY;
        end
        S_DELAY: begin
          dly_cnt <= dly_cnt - 16'd1;
          if (dly_cnt == 16'd1) state <= S_WINDOW;
        end
        S_WINDOW: begin
          win_active <= 1'b1;
          win_first  <= (idx == '0);
          smp_idx    <= idx;
          int_gate   <= ({1'b0, idx} >= {1'b0, int_start}) && ({1'b0, idx} < int_end);
          q_strobe   <= (idx == q_sample);
          calc_start <= ({1'b0, idx} == calc_idx);
          if (idx == last_idx) state <= S_IDLE;
          else idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the decoded strobes only occur inside the window
  a_gate_in_window: assert property (@(posedge clk) disable iff (rst) int_gate |-> win_active);
  a_calc_in_window: assert property (@(posedge clk) disable iff (rst) calc_start |-> win_active);
  a_q_in_window:    assert property (@(posedge clk) disable iff (rst) q_strobe |-> win_active);

endmodule
