// font_pkg: types and constants shared by the bunch-by-bunch feedback firmware.
//
// The numbers that come from the published system are the seven digitised
// channels (I and Q of three dipole BPMs plus the reference-cavity charge q),
// 14-bit ADC words reduced to 13 bits by dropping the noise LSB, a 164-sample
// window, integration of up to 15 samples, four charge lookup tables and a
// 14-bit kicker DAC. Table sizes, fixed-point scaling, register map and the
// command protocol are choices of this design.
package font_pkg;

  localparam int N_CH       = 7;    // digitised channels
  localparam int N_BPM      = 3;    // dipole BPMs IPA, IPB, IPC (bpm_e codes 0..N_BPM-1)
  localparam int ADC_W      = 14;   // ADC word width
  localparam int SMP_W      = 13;   // after dropping the LSB
  localparam int COR_W      = 14;   // offset-corrected sample width
  localparam int WINDOW_LEN = 164;  // samples per window
  localparam int IDX_W      = 8;    // sample index width
  localparam int MAX_INT    = 15;   // longest integration
  localparam int SUM_W      = COR_W + 4;
  localparam int N_LUT      = 4;
  localparam int LUT_AW     = 12;
  localparam int LUT_DW     = 16;
  localparam int FRAC       = 16;   // LUT entries are C_i/q * 2^FRAC
  localparam int DAC_W      = 14;
  localparam int TRIM_W     = 16;
  localparam int FB_PIPE    = 3;    // fb_calc pipeline depth

  // Channel order inside the firmware
  typedef enum logic [2:0] {
    CH_IPA_I = 3'd0, CH_IPA_Q = 3'd1,
    CH_IPB_I = 3'd2, CH_IPB_Q = 3'd3,
    CH_IPC_I = 3'd4, CH_IPC_Q = 3'd5,
    CH_REF_Q = 3'd6
  } chan_e;

  typedef enum logic [1:0] {
    BPM_IPA = 2'd0, BPM_IPB = 2'd1, BPM_IPC = 2'd2, BPM_NONE = 2'd3
  } bpm_e;

  typedef enum logic [1:0] {
    MODE_OFF = 2'd0, MODE_FEEDBACK = 2'd1, MODE_CONSTANT = 2'd2
  } kick_mode_e;

  // Register addresses (7-bit)
  localparam logic [6:0] R_CTRL     = 7'h00; // [1:0] mode, [2] two_bpm, [3] toggle on/off per train
  localparam logic [6:0] R_SEL      = 7'h01; // [1:0] BPM of input A, [3:2] BPM of input B
  localparam logic [6:0] R_TRIGDLY  = 7'h02;
  localparam logic [6:0] R_INTSTART = 7'h03;
  localparam logic [6:0] R_INTLEN   = 7'h04;
  localparam logic [6:0] R_QSAMPLE  = 7'h05;
  localparam logic [6:0] R_KICKDLY  = 7'h06;
  localparam logic [6:0] R_KICKLEN  = 7'h07;
  localparam logic [6:0] R_CONST    = 7'h08;
  localparam logic [6:0] R_COFF     = 7'h09;
  localparam logic [6:0] R_AMPSTART = 7'h0A;
  localparam logic [6:0] R_AMPLEN   = 7'h0B;
  localparam logic [6:0] R_LUTADDR  = 7'h0C; // [11:0] address, [13:12] table
  localparam logic [6:0] R_LUTDATA  = 7'h0D; // write: entry, address increments
  localparam logic [6:0] R_WFADDR   = 7'h0E; // [7:0] sample, [10:8] channel
  localparam logic [6:0] R_WFDATA   = 7'h0F; // read: sample, address increments
  localparam logic [6:0] R_OFFSET0  = 7'h10; // 0x10..0x16 baseline offsets
  localparam logic [6:0] R_SATCNT   = 7'h17; // read: kicks clipped to the DAC range
  localparam logic [6:0] R_TRIM0    = 7'h18; // 0x18..0x1E trim DAC values
  localparam logic [6:0] R_STATUS   = 7'h1F; // read: [15:0] trigger count
  localparam logic [6:0] R_WINLEN   = 7'h20; // window length, 1..WINDOW_LEN

  typedef struct packed {
    kick_mode_e              mode;
    logic                    two_bpm;
    logic                    toggle;
    bpm_e                    sel_a;
    bpm_e                    sel_b;
    logic [15:0]             trig_delay;
    logic [IDX_W-1:0]        win_len;
    logic [IDX_W-1:0]        int_start;
    logic [3:0]              int_len;
    logic [IDX_W-1:0]        q_sample;
    logic [7:0]              kick_delay;
    logic [15:0]             kick_len;
    logic signed [DAC_W-1:0] const_val;
    logic signed [DAC_W-1:0] c_off;
    logic [IDX_W-1:0]        amp_start;
    logic [7:0]              amp_len;
  } cfg_t;

endpackage
