// bpm_mux: the four feedback-input multiplexers.
//
// The feedback uses either one BPM or a pair of BPMs. Four multiplexers pick,
// from the three dipole BPMs, the I and Q samples of input A and of input B;
// these feed the four integrators and are weighted by the four charge LUTs.
// In single-BPM mode (two_bpm = 0) input B is forced to zero so that it adds
// nothing to the kick; a select code of BPM_NONE also gives zero.
// Purely combinational. That the four multiplexers carry I_A, Q_A, I_B, Q_B
// and how input B is disabled are this design's reading of the system.
module bpm_mux
  import font_pkg::*;
(
  input  logic signed [COR_W-1:0] smp     [N_CH],
  input  bpm_e                    sel_a,
  input  bpm_e                    sel_b,
  input  logic                    two_bpm,
  output logic signed [COR_W-1:0] mux_out [N_LUT]   // I_A, Q_A, I_B, Q_B
);

  function automatic logic signed [COR_W-1:0] pick(bpm_e sel, logic q_not_i,
                                                   logic signed [COR_W-1:0] s [N_CH]);
    unique case (sel)
      BPM_IPA: return q_not_i ? s[CH_IPA_Q] : s[CH_IPA_I];
      BPM_IPB: return q_not_i ? s[CH_IPB_Q] : s[CH_IPB_I];
      BPM_IPC: return q_not_i ? s[CH_IPC_Q] : s[CH_IPC_I];
      default: return '0;
    endcase
  endfunction

  always_comb begin
    mux_out[0] = pick(sel_a, 1'b0, smp);
    mux_out[1] = pick(sel_a, 1'b1, smp);
    mux_out[2] = two_bpm ? pick(sel_b, 1'b0, smp) : '0;
    mux_out[3] = two_bpm ? pick(sel_b, 1'b1, smp) : '0;
  end

endmodule
