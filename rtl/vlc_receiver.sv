// vlc_receiver: beacon-based VLC receiver for pre-scrambled (256,158) polar
// codewords sent with OOK.
//
// Chain: 12-bit ADC samples -> 3-bit soft-decision filter (seven SNR-
// dependent thresholds, LLR lookup, 5-bit LLR frame of 256) -> SC polar
// decoder (158 message bits, non-systematic or systematic code) -> P2S ->
// descrambler (x^15 + x^14 + 1). The descrambled 158-bit beacon frame leaves
// serially on out_*, where the frame-decapsulation logic would attach.
//
// Interface: one ADC sample per clock with adc_valid, adc_sof on the first
// sample of each codeword. snr selects the threshold spacing and the lookup
// bank; lut_wr_* reloads lookup entries; systematic selects the code type
// of a codeword and is sampled with its first sample (adc_sof).
// out_valid/out_bit/out_first/out_last carry the frame, bit 0 first.
// Timing: the decoded frame is ready (decoder out_valid) 386 cycles after the
// first sample of the codeword is presented (256 sample cycles + 130 decoder
// cycles); the first serial bit leaves the descrambler 2 cycles later and the
// 158 bits follow on consecutive cycles.
//
// The block chain follows the paper's receiver and decoder diagrams. The ADC,
// the analog front end and the frame decapsulation are outside this module.
module vlc_receiver
  import vlc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               adc_valid,
  input  logic               adc_sof,
  input  adc_t               adc_data,
  input  snr_t               snr,
  input  logic               systematic,
  input  logic               lut_wr_en,
  input  logic [LUT_AW-1:0]  lut_wr_addr,
  input  lut_llr_t           lut_wr_data,
  output logic               frame_decoded,   // decoder finished a codeword
  output logic               out_valid,
  output logic               out_bit,
  output logic               out_first,
  output logic               out_last
);

  llr_t  llr_frame [N];
  logic  frame_valid, dec_ready;
  msg_t  msg;
  logic  s_valid, s_bit, s_first, s_last;
  logic  sys_frame;

  // The code type belongs to the codeword: it is taken with the codeword's
  // first sample and handed to the decoder with the collected frame.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     sys_frame <= 1'b0;
    else if (adc_valid && adc_sof)  sys_frame <= systematic;
  end

  soft_decision_filter u_sdf (
    .clk, .rst_n,
    .in_valid(adc_valid), .in_sof(adc_sof), .in_data(adc_data), .snr,
    .lut_wr_en, .lut_wr_addr, .lut_wr_data,
    .llr_out(llr_frame), .frame_valid
  );

  sc_polar_decoder u_dec (
    .clk, .rst_n,
    .in_valid(frame_valid), .llr_in(llr_frame), .systematic(sys_frame),
    .ready(dec_ready), .out_valid(frame_decoded), .msg_out(msg)
  );

  p2s #(.WIDTH(K)) u_p2s (
    .clk, .rst_n, .load(frame_decoded), .word(msg),
    .out_valid(s_valid), .out_bit(s_bit), .out_first(s_first), .out_last(s_last)
  );

  descrambler u_dsc (
    .clk, .rst_n,
    .in_valid(s_valid), .in_bit(s_bit), .in_first(s_first), .in_last(s_last),
    .out_valid, .out_bit, .out_first, .out_last
  );

  ap_dec_free: assert property (@(posedge clk) disable iff (!rst_n) frame_valid |-> dec_ready)
    else $error("codeword arrived while the decoder was busy");

endmodule
