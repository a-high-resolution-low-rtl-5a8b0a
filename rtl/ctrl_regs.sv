// ctrl_regs: command decoder and register file behind the RS-232 link.
//
// The data-acquisition host configures the firmware over a serial link:
// feedback mode, BPM selection, trigger delay, window length, integration
// window, charge sample, added kick delay and length, constant drive,
// offset c, amplifier trigger, per-channel baseline offsets and trim-DAC
// values; it preloads the four charge LUTs and reads back the captured
// waveforms.
//
// Protocol (this design's own): the first byte is {rd, addr[6:0]}.
//   write (rd = 0): two more bytes follow, data[15:8] then data[7:0];
//   read  (rd = 1): the firmware answers with data[15:8] then data[7:0].
// Writing R_LUTDATA stores the word in table R_LUTADDR[13:12] at address
// R_LUTADDR[11:0] and increments the address. Reading R_WFDATA returns the
// captured sample at R_WFADDR (channel [10:8], sample [7:0]) and increments
// the sample index. R_STATUS reads the trigger counter and R_SATCNT the number of kicks
// clipped to the DAC range.
// Register writes take effect one cycle after the last byte; a read answer
// starts two cycles after the command byte.
module ctrl_regs
  import font_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic [7:0]               rx_data,
  input  logic                     rx_valid,
  output logic [7:0]               tx_data,
  output logic                     tx_start,
  input  logic                     tx_busy,
  input  logic [15:0]              trig_count,
  input  logic [15:0]              sat_count,
  output cfg_t                     cfg,
  output logic signed [SMP_W-1:0]  offset   [N_CH],
  output logic [TRIM_W-1:0]        trim_dac [N_CH],
  output logic [N_LUT-1:0]         lut_we,
  output logic [LUT_AW-1:0]        lut_waddr,
  output logic signed [LUT_DW-1:0] lut_wdata,
  output logic [2:0]               wf_rch,
  output logic [IDX_W-1:0]         wf_raddr,
  input  logic [SMP_W-1:0]         wf_rdata
);

  typedef enum logic [2:0] {C_IDLE, C_WR_HI, C_WR_LO, C_RD_PREP, C_RD_HI, C_RD_LO} cstate_e;
  cstate_e st;

  logic [6:0]  addr;
  logic [7:0]  hi;
  logic [15:0] rd_val;
  logic [1:0]  lut_sel;
  logic [15:0] rd_mux;

  // read-back multiplexer
  always_comb begin
    rd_mux = '0;
    unique case (addr)
      R_CTRL:     rd_mux = {12'd0, cfg.toggle, cfg.two_bpm, cfg.mode};
      R_SEL:      rd_mux = {12'd0, cfg.sel_b, cfg.sel_a};
      R_TRIGDLY:  rd_mux = cfg.trig_delay;
      R_WINLEN:   rd_mux = 16'(cfg.win_len);
      R_INTSTART: rd_mux = 16'(cfg.int_start);
      R_INTLEN:   rd_mux = 16'(cfg.int_len);
      R_QSAMPLE:  rd_mux = 16'(cfg.q_sample);
      R_KICKDLY:  rd_mux = 16'(cfg.kick_delay);
      R_KICKLEN:  rd_mux = cfg.kick_len;
      R_CONST:    rd_mux = 16'(cfg.const_val);
      R_COFF:     rd_mux = 16'(cfg.c_off);
      R_AMPSTART: rd_mux = 16'(cfg.amp_start);
      R_AMPLEN:   rd_mux = 16'(cfg.amp_len);
      R_LUTADDR:  rd_mux = {2'b00, lut_sel, lut_waddr};
      R_WFADDR:   rd_mux = {5'd0, wf_rch, wf_raddr};
      R_WFDATA:   rd_mux = 16'(signed'(wf_rdata));
      R_STATUS:   rd_mux = trig_count;
      R_SATCNT:   rd_mux = sat_count;
      default: begin
        if (addr >= R_OFFSET0 && addr < R_OFFSET0 + 7'(N_CH))
          rd_mux = 16'(offset[3'(addr - R_OFFSET0)]);
        else if (addr >= R_TRIM0 && addr < R_TRIM0 + 7'(N_CH))
          rd_mux = trim_dac[3'(addr - R_TRIM0)];
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= C_IDLE;
      addr      <= '0;
      hi        <= '0;
      rd_val    <= '0;
      tx_data   <= '0;
      tx_start  <= 1'b0;
      lut_we    <= '0;
      lut_sel   <= '0;
      lut_waddr <= '0;
      lut_wdata <= '0;
      wf_rch    <= '0;
      wf_raddr  <= '0;
      cfg.mode       <= MODE_OFF;
      cfg.two_bpm    <= 1'b0;
      cfg.toggle     <= 1'b0;
      cfg.sel_a      <= BPM_IPA;
      cfg.sel_b      <= BPM_IPC;
      cfg.trig_delay <= '0;
      cfg.win_len    <= IDX_W'(WINDOW_LEN);
      cfg.int_start  <= IDX_W'(20);
      cfg.int_len    <= 4'd1;
      cfg.q_sample   <= IDX_W'(20);
      cfg.kick_delay <= '0;
      cfg.kick_len   <= 16'd100;
      cfg.const_val  <= '0;
      cfg.c_off      <= '0;
      cfg.amp_start  <= '0;
      cfg.amp_len    <= '0;
      for (int i = 0; i < N_CH; i++) begin
        offset[i]   <= '0;
        trim_dac[i] <= '0;
      end
    end else begin
      tx_start <= 1'b0;
      if (lut_we != '0) lut_waddr <= lut_waddr + 1'b1;
      lut_we   <= '0;
      unique case (st)
        C_IDLE: if (rx_valid) begin
          addr <= rx_data[6:0];
          st   <= rx_data[7] ? C_RD_PREP : C_WR_HI;
        end
        C_WR_HI: if (rx_valid) begin
          hi <= rx_data;
          st <= C_WR_LO;
        end
        C_WR_LO: if (rx_valid) begin
          st <= C_IDLE;
          unique case (addr)
            R_CTRL: begin
              cfg.mode    <= kick_mode_e'(rx_data[1:0]);
              cfg.two_bpm <= rx_data[2];
              cfg.toggle  <= rx_data[3];
            end
            R_SEL: begin
              cfg.sel_a <= bpm_e'(rx_data[1:0]);
              cfg.sel_b <= bpm_e'(rx_data[3:2]);
            end
            R_TRIGDLY:  cfg.trig_delay <= {hi, rx_data};
            R_WINLEN:   cfg.win_len    <= rx_data;
            R_INTSTART: cfg.int_start  <= rx_data;
            R_INTLEN:   cfg.int_len    <= (rx_data[3:0] == 4'd0) ? 4'd1 : rx_data[3:0];
            R_QSAMPLE:  cfg.q_sample   <= rx_data;
            R_KICKDLY:  cfg.kick_delay <= rx_data;
            R_KICKLEN:  cfg.kick_len   <= {hi, rx_data};
            R_CONST:    cfg.const_val  <= DAC_W'({hi, rx_data});
            R_COFF:     cfg.c_off      <= DAC_W'({hi, rx_data});
            R_AMPSTART: cfg.amp_start  <= rx_data;
            R_AMPLEN:   cfg.amp_len    <= rx_data;
            R_LUTADDR: begin
              lut_waddr <= {hi[3:0], rx_data};
              lut_sel   <= hi[5:4];
            end
            R_LUTDATA: begin
              lut_wdata        <= {hi, rx_data};
              lut_we[lut_sel]  <= 1'b1;
            end
            R_WFADDR: begin
              wf_raddr <= rx_data;
              wf_rch   <= hi[2:0];
            end
            default: begin
              if (addr >= R_OFFSET0 && addr < R_OFFSET0 + 7'(N_CH))
                offset[3'(addr - R_OFFSET0)] <= SMP_W'({hi, rx_data});
              else if (addr >= R_TRIM0 && addr < R_TRIM0 + 7'(N_CH))
                trim_dac[3'(addr - R_TRIM0)] <= {hi, rx_data};
            end
          endcase
        end
        C_RD_PREP: begin
          rd_val <= rd_mux;
          if (addr == R_WFDATA) wf_raddr <= wf_raddr + 1'b1;
          st <= C_RD_HI;
        end
        C_RD_HI: if (!tx_busy) begin
          tx_data  <= rd_val[15:8];
          tx_start <= 1'b1;
          st       <= C_RD_LO;
        end
        C_RD_LO: if (!tx_busy && !tx_start) begin
          tx_data  <= rd_val[7:0];
          tx_start <= 1'b1;
          st       <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // a byte is only handed to the transmitter when it is idle
  a_tx_idle: assert property (@(posedge clk) disable iff (rst) tx_start |-> !tx_busy);
  // at most one table is written at a time
  a_lut_onehot: assert property (@(posedge clk) disable iff (rst) $onehot0(lut_we));

endmodule
