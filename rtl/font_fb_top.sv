// font_fb_top: FPGA firmware of a bunch-by-bunch cavity-BPM position feedback.
//
// Signal flow, all at the beam-locked 357 MHz sample clock:
//   adc_in -> adc_frontend (drop LSB, subtract baseline) -> bpm_mux (I/Q of
//   input A and B) -> four sample_integrators -> fb_calc, which weights each
//   sum by a charge_lut value C_i/q read with the reference-cavity charge
//   sample -> kick_timing -> dac_code for the kicker DAC.
// sample_window turns the trigger into a delayed window of up to 164
// samples and the integration, charge-sample and calculation strobes;
// waveform_buffer keeps the last window; ctrl_regs with uart_rx/uart_tx is the RS-232 control link.
//
// Bunch 1 of a two-bunch train is integrated and its kick is on the DAC a
// fixed time later whatever the integration length (up to 15 samples):
// the calculation always starts at window sample int_start+15, so the DAC
// word changes 20 + kick_delay clock edges after the edge that captures the
// ADC word of the first integrated sample (6 + kick_delay after the capture
// of the 15th possible sample). The charge sample must be at most
// int_start+13 so that its LUT values are ready. With the per-train toggle bit set, feedback (or the
// constant drive) is applied on every second train only; fb_on shows it.
//
// What follows the original system: channel set, 13-bit samples, baseline
// offsets, 164-sample window, up to 15 integrated samples at fixed output
// time, four charge LUTs, four input multiplexers, V = -G y/M + c, constant
// drive mode, added kick delay, amplifier trigger output, trim-DAC values and
// RS-232 control. Widths, protocol, register map and pipeline are this
// design's own. trim_dac only carries the settings for the external trim DACs.
module font_fb_top
  import font_pkg::*;
#(
  parameter int CLKS_PER_BIT = 3099
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              trig_in,
  input  logic [ADC_W-1:0]  adc_in   [N_CH],
  input  logic              uart_rxd,
  output logic              uart_txd,
  output logic [DAC_W-1:0]  dac_code,
  output logic              dac_update,
  output logic              amp_trig,
  output logic [TRIM_W-1:0] trim_dac [N_CH],
  output logic              fb_on
);

  // ---------------- control link ----------------
  cfg_t                     cfg;
  logic [7:0]               rx_data, tx_data;
  logic                     rx_valid, tx_start, tx_busy;
  logic signed [SMP_W-1:0]  offset [N_CH];
  logic [N_LUT-1:0]         lut_we;
  logic [LUT_AW-1:0]        lut_waddr;
  logic signed [LUT_DW-1:0] lut_wdata;
  logic [2:0]               wf_rch;
  logic [IDX_W-1:0]         wf_raddr;
  logic [SMP_W-1:0]         wf_rdata;
  logic [15:0]              trig_count;
  logic [15:0]              sat_count;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst, .rxd(uart_rxd), .data(rx_data), .valid(rx_valid));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst, .data(tx_data), .start(tx_start), .txd(uart_txd), .busy(tx_busy));

  ctrl_regs u_regs (
    .clk, .rst, .rx_data, .rx_valid, .tx_data, .tx_start, .tx_busy, .trig_count, .sat_count,
    .cfg, .offset, .trim_dac, .lut_we, .lut_waddr, .lut_wdata,
    .wf_rch, .wf_raddr, .wf_rdata);

  // ---------------- timing ----------------
  logic             win_active, win_first, int_gate, q_strobe, calc_start, trig_seen;
  logic [IDX_W-1:0] smp_idx;

  sample_window u_win (
    .clk, .rst, .trig_in, .trig_delay(cfg.trig_delay), .win_len(cfg.win_len),
    .int_start(cfg.int_start),
    .int_len(cfg.int_len), .q_sample(cfg.q_sample), .win_active, .win_first,
    .smp_idx, .int_gate, .q_strobe, .calc_start, .trig_seen);

  // per-train feedback on/off
  always_ff @(posedge clk) begin
    if (rst) begin
      fb_on      <= 1'b0;
      trig_count <= '0;
    end else if (trig_seen) begin
      fb_on      <= cfg.toggle ? ~fb_on : 1'b1;
      trig_count <= trig_count + 1'b1;
    end
  end

  // ---------------- datapath ----------------
  logic signed [SMP_W-1:0] smp_raw [N_CH];
  logic signed [COR_W-1:0] smp     [N_CH];
  logic [SMP_W-1:0]        wf_wdata [N_CH];

  adc_frontend u_fe (.clk, .rst, .adc_in, .offset, .smp_raw, .smp);

  always_comb
    for (int i = 0; i < N_CH; i++) wf_wdata[i] = smp_raw[i];

  // smp_raw is one cycle ahead of smp and the window indexes smp, so the
  // captured samples are delayed by one cycle to line up with the index.
  logic [SMP_W-1:0] wf_wdata_d [N_CH];
  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i < N_CH; i++) wf_wdata_d[i] <= '0;
    else     for (int i = 0; i < N_CH; i++) wf_wdata_d[i] <= wf_wdata[i];
  end

  waveform_buffer u_wf (
    .clk, .we(win_active), .waddr(smp_idx), .wdata(wf_wdata_d),
    .rch(wf_rch), .raddr(wf_raddr), .rdata(wf_rdata));

  logic signed [COR_W-1:0] mux_out [N_LUT];
  bpm_mux u_mux (.smp, .sel_a(cfg.sel_a), .sel_b(cfg.sel_b), .two_bpm(cfg.two_bpm), .mux_out);

  logic signed [SUM_W-1:0] sums [N_LUT];
  for (genvar g = 0; g < N_LUT; g++) begin : g_int
    sample_integrator u_int (
      .clk, .rst, .clear(win_first), .gate(int_gate), .din(mux_out[g]), .sum(sums[g]));
  end

  // charge sample -> LUT address: magnitude of the negative-going q pulse
  logic signed [COR_W-1:0]  q_hold;
  logic [LUT_AW-1:0]        q_addr;
  logic signed [LUT_DW-1:0] coef [N_LUT];

  always_ff @(posedge clk) begin
    if (rst) q_hold <= '0;
    else if (q_strobe) q_hold <= smp[CH_REF_Q];
  end

  always_comb begin
    if (q_hold >= 0)
      q_addr = '0;
    else if (-q_hold > COR_W'(2**LUT_AW - 1))
      q_addr = '1;
    else
      q_addr = LUT_AW'(-q_hold);
  end

  for (genvar g = 0; g < N_LUT; g++) begin : g_lut
    charge_lut u_lut (
      .clk, .we(lut_we[g]), .waddr(lut_waddr), .wdata(lut_wdata),
      .raddr(q_addr), .rdata(coef[g]));
  end

  kick_mode_e              eff_mode;
  logic signed [DAC_W-1:0] v_out;
  logic                    v_valid, v_sat;

  assign eff_mode = fb_on ? cfg.mode : MODE_OFF;

  fb_calc u_fb (
    .clk, .rst, .start(calc_start), .sums, .coef, .c_off(cfg.c_off), .mode(eff_mode),
    .const_val(cfg.const_val), .v_out, .v_valid, .sat(v_sat));

  // number of kicks clipped to the DAC range, readable over the link
  always_ff @(posedge clk) begin
    if (rst) sat_count <= '0;
    else if (v_valid && v_sat) sat_count <= sat_count + 1'b1;
  end

  kick_timing u_kick (
    .clk, .rst, .v_in(v_out), .v_valid, .kick_delay(cfg.kick_delay), .kick_len(cfg.kick_len),
    .win_active, .smp_idx, .amp_start(cfg.amp_start), .amp_len(cfg.amp_len),
    .dac_code, .dac_update, .amp_trig);

endmodule
