// tb_ber_fer: bit- and frame-error-rate run of the complete receiver, the
// kind of measurement behind the paper's BER/FER curves, at a reduced frame
// count. For three noise levels and both code types, random beacon frames
// are scrambled, encoded, sent over the OOK channel model and decoded. It
// prints the raw (hard-decision) channel BER next to the decoded BER and FER.
// Checks: every output frame equals the bit-exact reference chain; the
// decoded BER at the lowest noise is below the raw BER there (coding gain);
// decoded BER and FER do not rise as the noise falls; the systematic code's
// BER, summed over the levels, is not above the non-systematic code's.
module tb_ber_fer;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  localparam int FRAMES = 200;           // per noise level and code type
  localparam int NLEV   = 3;
  localparam int NOISE [NLEV] = '{850, 750, 650};

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic adc_valid = 0, adc_sof = 0;
  adc_t adc_data = '0;
  snr_t snr = '0;
  logic systematic = 0;
  logic lut_wr_en = 0;
  logic [LUT_AW-1:0] lut_wr_addr = '0;
  lut_llr_t lut_wr_data = '0;
  logic frame_decoded, out_valid, out_bit, out_first, out_last;

  vlc_receiver dut (.*);

  always #5 clk = ~clk;

  msg_t got;
  int   nb = 0;
  bit   frame_done = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_first) nb = 0;
    got[nb] = out_bit;
    nb++;
    if (out_last) frame_done = 1;
  end

  initial begin
    int raw_err [2][NLEV], bit_err [2][NLEV], frm_err [2][NLEV];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int sys = 0; sys < 2; sys++)
      for (int lv = 0; lv < NLEV; lv++) begin
        raw_err[sys][lv] = 0; bit_err[sys][lv] = 0; frm_err[sys][lv] = 0;
        for (int f = 0; f < FRAMES; f++) begin
          msg_t m, ms, d, e;
          word_t x;
          int l [N];
          int be;
          for (int w = 0; w < 5; w++) m[w*32 +: 32] = $urandom;
          ms = scramble(m);
          x  = sys ? spe(ms) : nspe(ms);
          for (int i = 0; i < int'(N); i++) begin
            adc_t a;
            a = ook_sample(x[i], 700, NOISE[lv]);
            l[i] = ref_scale(ref_llr9(ref_level(int'(a), 0)));
            if ((int'(a) < 2048) != x[i]) raw_err[sys][lv]++;
            adc_valid = 1; adc_sof = (i == 0); adc_data = a; systematic = bit'(sys);
            @(negedge clk);
          end
          adc_valid = 0; adc_sof = 0;
          d = ref_decode(l, bit'(sys));
          e = scramble(d);
          frame_done = 0;
          wait (frame_done);
          @(negedge clk);
          checks++;
          if (got != e) begin failures++; $display("FAIL output differs from reference"); end
          be = $countones(got ^ m);
          bit_err[sys][lv] += be;
          if (be != 0) frm_err[sys][lv]++;
        end
        $display("%s noise %0d: raw BER %f  decoded BER %f  FER %f",
                 sys ? "SPE " : "NSPE", NOISE[lv],
                 real'(raw_err[sys][lv]) / (FRAMES * 256.0),
                 real'(bit_err[sys][lv]) / (FRAMES * 158.0),
                 real'(frm_err[sys][lv]) / FRAMES);
      end
    for (int sys = 0; sys < 2; sys++) begin
      checks++;
      if (!(real'(bit_err[sys][NLEV-1]) / 158.0 < real'(raw_err[sys][NLEV-1]) / 256.0)) begin
        failures++; $display("FAIL no coding gain at the lowest noise");
      end
      for (int lv = 1; lv < NLEV; lv++) begin
        checks += 2;
        if (bit_err[sys][lv] > bit_err[sys][lv-1]) begin failures++; $display("FAIL BER rose as noise fell"); end
        if (frm_err[sys][lv] > frm_err[sys][lv-1]) begin failures++; $display("FAIL FER rose as noise fell"); end
      end
    end
    // the paper reports a lower BER for the systematic code than for the
    // non-systematic one; summed over the levels the same must hold here
    checks++;
    if (bit_err[1].sum() > bit_err[0].sum()) begin
      failures++; $display("FAIL systematic BER above non-systematic BER");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
