// kick_timing: DAC output register, added kick delay and amplifier trigger.
//
// When fb_calc delivers a kick value (v_valid) it is loaded into the DAC
// output word kick_delay cycles later (0 = next cycle), held for kick_len
// cycles (at least one) and then the output returns to zero drive. The added
// delay is the controlled delay used to measure the loop latency by sliding
// a constant kick past the second bunch. dac_code is offset binary
// (zero kick = 2^(DW-1)); dac_update pulses on the cycle the word changes.
// amp_trig (the board's auxiliary output A, triggering the kicker amplifier)
// is high for window samples amp_start .. amp_start+amp_len-1.
// Timing: dac_code shows a value v_valid'd at cycle t from cycle t+1+kick_delay.
// The output format, hold length and amplifier-gate form are this design's
// choices.
module kick_timing
  import font_pkg::*;
#(
  parameter int DW = DAC_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [DW-1:0] v_in,
  input  logic                 v_valid,
  input  logic [7:0]           kick_delay,
  input  logic [15:0]          kick_len,
  input  logic                 win_active,
  input  logic [IDX_W-1:0]     smp_idx,
  input  logic [IDX_W-1:0]     amp_start,
  input  logic [7:0]           amp_len,
  output logic [DW-1:0]        dac_code,
  output logic                 dac_update,
  output logic                 amp_trig
);

  localparam logic [DW-1:0] ZERO = DW'(2**(DW-1));

  typedef enum logic [1:0] {K_IDLE, K_PEND, K_HOLD} kstate_e;
  kstate_e kstate;
  logic signed [DW-1:0] v_hold;
  logic [7:0]  dcnt;
  logic [15:0] hcnt;
  logic [IDX_W:0] amp_end;

  assign amp_end = {1'b0, amp_start} + (IDX_W+1)'(amp_len);

  function automatic logic [DW-1:0] to_code(logic signed [DW-1:0] v);
    return {~v[DW-1], v[DW-2:0]};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      kstate     <= K_IDLE;
      v_hold     <= '0;
      dcnt       <= '0;
      hcnt       <= '0;
      dac_code   <= ZERO;
      dac_update <= 1'b0;
      amp_trig   <= 1'b0;
    end else begin
      dac_update <= 1'b0;
      amp_trig   <= win_active && ({1'b0, smp_idx} >= {1'b0, amp_start}) &&
                    ({1'b0, smp_idx} < amp_end);
      if (v_valid) begin
        v_hold <= v_in;
        hcnt   <= (kick_len == 16'd0) ? 16'd1 : kick_len;
        if (kick_delay == 8'd0) begin
          dac_code   <= to_code(v_in);
          dac_update <= 1'b1;
          kstate     <= K_HOLD;
        end else begin
          dcnt   <= kick_delay;
          kstate <= K_PEND;
        end
      end else begin
        unique case (kstate)
          K_PEND: begin
            dcnt <= dcnt - 8'd1;
            if (dcnt == 8'd1) begin
              dac_code   <= to_code(v_hold);
              dac_update <= 1'b1;
              kstate     <= K_HOLD;
            end
          end
          K_HOLD: begin
            hcnt <= hcnt - 16'd1;
            if (hcnt == 16'd1) begin
              dac_code   <= ZERO;
              dac_update <= 1'b1;
              kstate     <= K_IDLE;
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
