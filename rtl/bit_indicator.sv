// bit_indicator: frozen/information flags of the (256,158) polar code.
//
// info_pair gives, for the pair j being decoded, whether bits 2j and 2j+1
// carry data (1) or are frozen to zero (0); info_mask is the whole set, used
// to pick the 158 message bits out of the decoded word. The set is the
// polarization-weight set computed in vlc_pkg (INFO_MASK). Combinational.
//
// The paper names a 'Bit Indicator' feeding the decoding layers but does not
// publish its information set; the polarization-weight construction is this
// design's choice.
module bit_indicator
  import vlc_pkg::*;
(
  input  logic [LOG2N-2:0] j,
  output logic [1:0]       info_pair,
  output word_t            info_mask
);

  assign info_mask = INFO_MASK;
  assign info_pair = INFO_MASK[{j, 1'b0} +: 2];

endmodule
