// comparator_bank: the eight comparators of the 3-bit soft-decision filter.
//
// Comparator k is high when the ADC sample lies in range k of the mapping
// table: range 0 is [V_peak-, V_t-3), range k is [thr[k-1], thr[k]) and
// range 7 is [V_t+3, V_peak+], where V_peak-/V_peak+ are the ends of the ADC
// scale. For ascending thresholds exactly one comparator is high, so the
// 8-bit result is one-hot; it is the iSelect[7:0] of the lookup table.
// Combinational.
//
// The ranges follow the paper's mapping table. The table writes every range
// as closed at both ends; here a sample equal to a threshold belongs to the
// upper range, which is this design's choice.
module comparator_bank
  import vlc_pkg::*;
(
  input  adc_t              sample,
  input  adc_t              thr [NTHR],
  output logic [NCMP-1:0]   sel          // one-hot iSelect[7:0]
);

  always_comb begin
    for (int k = 0; k < int'(NCMP); k++) begin
      logic above_lo, below_hi;
      above_lo = (k == 0)             ? 1'b1 : (sample >= thr[k-1]);
      below_hi = (k == int'(NCMP)-1)  ? 1'b1 : (sample <  thr[k]);
      sel[k] = above_lo && below_hi;
    end
  end

endmodule
