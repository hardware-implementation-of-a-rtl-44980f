// vlc_pkg: sizes, types and constants shared by the beacon VLC receiver.
//
// The code is a (256,158) polar code: N = 256 coded bits carry K = 158
// message bits, the JEITA beacon-frame length. The soft-decision filter
// works on 12-bit ADC samples with seven thresholds (3-bit soft decision),
// its lookup table holds 9-bit LLRs and it hands the decoder 5-bit LLRs;
// those widths are printed in the filter's block diagram.
//
// Not given by the paper and chosen here:
//  * the information set. It is built by polarization weight (PW):
//      PW(i) = sum over set bits b of i of 2^(b/4)
//    evaluated in integer fixed point (scaled by 10000), and the 158
//    indices of largest PW carry data (ties go to the larger index). The set
//    is computed at elaboration by compute_info_mask(); no table is stored.
//  * the fixed-point format of the lookup table: signed Q2.7 (value*128),
//    giving the LLR_TABLE values below from the paper's real numbers.
//  * the internal LLR width of the decoder PEs (PE_W = 7, saturating).
package vlc_pkg;

  localparam int unsigned N       = 256;   // code length
  localparam int unsigned K       = 158;   // message (beacon frame) length
  localparam int unsigned LOG2N   = 8;
  localparam int unsigned ADC_W   = 12;    // iData width
  localparam int unsigned SNR_W   = 4;     // SNR setting width
  localparam int unsigned NCMP    = 8;     // comparators / LLR levels
  localparam int unsigned NTHR    = 7;     // thresholds V_t-3 .. V_t+3
  localparam int unsigned LUT_W   = 9;     // LLR width out of the lookup table
  localparam int unsigned LLR_W   = 5;     // LLR width into the decoder
  localparam int unsigned PE_W    = 7;     // LLR width inside the decoder
  localparam int unsigned LUT_AW  = SNR_W + 3; // {SNR, level}
  localparam int unsigned LUT_DEPTH = 1 << LUT_AW; // 128 x 9 = 1152 bits

  typedef logic [ADC_W-1:0]         adc_t;
  typedef logic [SNR_W-1:0]         snr_t;
  typedef logic signed [LUT_W-1:0]  lut_llr_t;
  typedef logic signed [LLR_W-1:0]  llr_t;
  typedef logic signed [PE_W-1:0]   pe_llr_t;
  typedef logic [N-1:0]             word_t;
  typedef logic [K-1:0]             msg_t;

  // Lookup-table contents for comparator ranges 0..7, in Q2.7:
  // -1.1943 -0.3547 -0.2116 -0.0702 0.0656 0.2185 0.3630 1.2017
  localparam lut_llr_t LLR_TABLE [NCMP] = '{
    -9'sd153, -9'sd45, -9'sd27, -9'sd9, 9'sd8, 9'sd28, 9'sd46, 9'sd154
  };

  // 2^(b/4) * 10000, b = 0..7
  localparam int PW_W [LOG2N] = '{10000, 11892, 14142, 16818, 20000, 23784, 28284, 33636};

  function automatic int pw(input int i);
    int s;
    s = 0;
    for (int b = 0; b < int'(LOG2N); b++)
      if (((i >> b) & 1) != 0) s += PW_W[b];
    return s;
  endfunction

  // Bit i of the result is 1 when u_i carries message data.
  function automatic word_t compute_info_mask();
    word_t m;
    int pws [N];
    for (int i = 0; i < int'(N); i++) pws[i] = pw(i);
    m = '0;
    for (int i = 0; i < int'(N); i++) begin
      int better;
      better = 0;
      for (int j = 0; j < int'(N); j++)
        if (pws[j] > pws[i] || (pws[j] == pws[i] && j > i)) better++;
      m[i] = (better < int'(K));
    end
    return m;
  endfunction

  localparam word_t INFO_MASK = compute_info_mask();

  // x = u * F^(kron n), F = [1 0; 1 1], natural bit order.
  function automatic word_t polar_transform(input word_t u);
    word_t x;
    x = u;
    for (int s = 0; s < int'(LOG2N); s++)
      for (int i = 0; i < int'(N); i++)
        if (((i >> s) & 1) == 0) x[i] = x[i] ^ x[i + (1 << s)];
    return x;
  endfunction

endpackage
