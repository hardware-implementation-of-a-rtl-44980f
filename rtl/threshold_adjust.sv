// threshold_adjust: the seven decision thresholds of the 3-bit soft-decision
// filter, V_t-3 .. V_t+3, as a function of the 4-bit SNR setting.
//
// The thresholds sit symmetrically around the centre level V_t:
//     thr[k] = V_CENTER + (k - 3) * step(snr),   k = 0..6  (thr[0] = V_t-3)
//     step(snr) = STEP_MAX - snr * STEP_DEC
// so a higher SNR setting (less noise around the two OOK levels) draws the
// thresholds closer to the centre. Purely combinational; the thresholds
// follow the SNR input in the same cycle.
//
// The paper shows a 'Threshold Adjustment' block driven by a 4-bit SNR and
// feeding all comparators, and says the thresholds are "established from the
// error probabilities of the two possible received signals 0 and 1"; it gives
// no values. The linear spacing rule and its constants are this design's own.
module threshold_adjust
  import vlc_pkg::*;
#(
  parameter int unsigned V_CENTER = 2048,  // V_t, middle of the 12-bit range
  parameter int unsigned STEP_MAX = 320,   // spacing at SNR setting 0
  parameter int unsigned STEP_DEC = 16     // spacing decrease per SNR step
) (
  input  snr_t snr,
  output adc_t thr [NTHR]                  // thr[0] = V_t-3 ... thr[6] = V_t+3
);

  logic [ADC_W-1:0] step;
  assign step = ADC_W'(STEP_MAX) - ADC_W'(snr) * ADC_W'(STEP_DEC);

  always_comb begin
    for (int k = 0; k < int'(NTHR); k++) begin
      if (k < 3) thr[k] = ADC_W'(V_CENTER) - ADC_W'(3 - k) * step;
      else       thr[k] = ADC_W'(V_CENTER) + ADC_W'(k - 3) * step;
    end
  end

  initial begin
    assert (STEP_MAX > STEP_DEC * 15) else $error("step must stay positive");
    assert (V_CENTER + 3 * STEP_MAX < (1 << ADC_W) && V_CENTER >= 3 * STEP_MAX)
      else $error("thresholds leave the ADC range");
  end

endmodule
