// soft_decision_filter: 3-bit soft-decision filter of the VLC receiver.
//
// Each 12-bit ADC sample (iData) is compared against seven thresholds
// V_t-3..V_t+3 by eight range comparators; the one-hot result together with
// the 4-bit SNR setting addresses the mapping lookup table, whose 9-bit LLR
// the transformer scales to 5 bits and collects into a 256-LLR frame for the
// polar decoder. One sample per clock when in_valid is high; in_sof marks the
// first sample of a codeword. The whole path up to the transformer register
// is combinational, so the frame is on llr_out, with frame_valid high, in the
// cycle after its 256th sample.
//
// The structure (threshold adjustment, comparators 0..7, lookup table
// addressed by iSelect[11:0], transformer, the 12/4/9/5-bit widths) follows
// the paper's filter diagram and mapping table. Sample timing recovery is not
// described in the paper: samples are assumed to arrive one per OOK bit,
// already aligned, with the frame start marked by in_sof.
module soft_decision_filter
  import vlc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_sof,
  input  adc_t               in_data,      // iData
  input  snr_t               snr,
  input  logic               lut_wr_en,
  input  logic [LUT_AW-1:0]  lut_wr_addr,
  input  lut_llr_t           lut_wr_data,
  output llr_t               llr_out [N],  // oLLR_0 .. oLLR_255
  output logic               frame_valid
);

  adc_t             thr [NTHR];
  logic [NCMP-1:0]  sel;
  lut_llr_t         llr9;

  threshold_adjust u_thr (.snr(snr), .thr(thr));

  comparator_bank u_cmp (.sample(in_data), .thr(thr), .sel(sel));

  mapping_lut u_lut (
    .clk, .rst_n, .snr, .sel, .llr(llr9),
    .wr_en(lut_wr_en), .wr_addr(lut_wr_addr), .wr_data(lut_wr_data)
  );

  llr_transformer u_tf (
    .clk, .rst_n, .in_valid, .in_sof, .in_llr(llr9),
    .llr_out, .frame_valid
  );

endmodule
