// tb_vlc_receiver: end-to-end test of the receiver at its default sizes.
//
// Beacon frames of 158 random bits are scrambled, polar-encoded (alternately
// non-systematic and systematic), mapped to OOK ADC levels with noise and fed
// one sample per clock, mostly back to back so that a codeword is collected
// while the previous one is decoded. The SNR setting changes between frames
// and one lookup-table entry is reloaded part-way. For every frame the
// expected output is computed by the reference chain (soft mapping, recursive
// SC decoder, descrambler); the serial output must match it bit for bit,
// noise-free frames must return the sent beacon frame, the decoder must
// finish exactly 386 cycles after the first sample of the codeword and the
// first output bit must follow 2 cycles later.
// Mechanisms counted (each must occur): systematic and non-systematic
// frames, SNR changes, a table reload in use, back-to-back codewords, idle
// gaps in the sample stream, and frames whose hard decisions held errors
// that the decoder corrected.
module tb_vlc_receiver;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  localparam int NFRAMES = 24;

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

  int   lut_shadow [128];
  msg_t exp_q [$];
  int   t_first_q [$];
  int   cycle = 0;
  int   frames_out = 0;
  int   n_sys = 0, n_nsys = 0, n_snr_change = 0, n_lut_used = 0, n_b2b = 0, n_gap = 0, n_corrected = 0;
  bit   lut_reloaded = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- decoder timing: 386 cycles from the first sample
  int t_dec_q [$];
  always @(posedge clk) if (rst_n && frame_decoded) begin
    int t0;
    t0 = t_first_q.pop_front();
    t_dec_q.push_back(cycle);
    checks++;
    if (cycle - t0 != 386) begin failures++; $display("FAIL decoder latency %0d", cycle - t0); end
  end

  // ---------------- output monitor
  msg_t got;
  int   nb = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_first) begin
      int td;
      nb = 0;
      td = t_dec_q.pop_front();
      checks++;
      if (cycle - td != 2) begin failures++; $display("FAIL first bit %0d cycles after decode", cycle - td); end
    end
    got[nb] = out_bit;
    nb++;
    if (out_last) begin
      msg_t e;
      e = exp_q.pop_front();
      checks++;
      if (nb != int'(K) || got != e) begin
        failures++;
        $display("FAIL frame %0d output differs from reference (%0d bits)", frames_out, nb);
      end
      frames_out++;
    end
  end

  task automatic send_frame(input int f, input int s, input bit sys, input int noise, input bit gaps);
    msg_t m, ms;
    word_t x;
    int l [N];
    int hard_err;
    if (int'(snr) != s) n_snr_change++;
    snr = snr_t'(s);
    for (int w = 0; w < 5; w++) m[w*32 +: 32] = $urandom;
    ms = scramble(m);
    x  = sys ? spe(ms) : nspe(ms);
    hard_err = 0;
    for (int i = 0; i < int'(N); i++) begin
      adc_t a;
      int lvl;
      if (gaps && i == 100) begin
        adc_valid = 0; adc_sof = 0;
        repeat (3) @(negedge clk);
        t_first_q[$] = t_first_q[$] + 3;   // the latency is counted without the gap
        n_gap++;
      end
      a = ook_sample(x[i], 700, noise);
      lvl = ref_level(int'(a), s);
      if (lut_reloaded && s * 8 + lvl == 5 * 8 + 7) n_lut_used++;
      l[i] = ref_scale(lut_shadow[s * 8 + lvl]);
      if ((l[i] < 0) != x[i]) hard_err++;
      if (i == 0) t_first_q.push_back(cycle);
      adc_valid = 1; adc_sof = (i == 0); adc_data = a; systematic = sys;
      @(negedge clk);
    end
    begin
      msg_t d;
      d = ref_decode(l, sys);
      exp_q.push_back(scramble(d));   // descrambling = the same XOR sequence
      if (noise == 0) begin
        checks++;
        if (scramble(d) != m) begin failures++; $display("FAIL clean frame %0d not recoverable", f); end
      end
      if (hard_err > 0 && d == ms) n_corrected++;
    end
    if (sys) n_sys++; else n_nsys++;
  endtask

  initial begin
    for (int a = 0; a < 128; a++) lut_shadow[a] = ref_llr9(a % 8);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NFRAMES; f++) begin
      int s, noise;
      s = (f < 4) ? 0 : (f < 8) ? 5 : (f < 16) ? 12 : 15;
      noise = (f % 4 == 0) ? 0 : 450;
      if (f == 6) begin
        // reload: strongest level of bank 5 from 1.2017 to 0.75 (96 in Q2.7)
        adc_valid = 0;
        lut_wr_en = 1; lut_wr_addr = LUT_AW'(5 * 8 + 7); lut_wr_data = 9'sd96;
        @(negedge clk);
        lut_wr_en = 0;
        lut_shadow[5 * 8 + 7] = 96;
        lut_reloaded = 1;
      end
      if (f > 0 && f != 6 && f % 3 != 2) n_b2b++;
      send_frame(f, s, bit'(f % 2), noise, f % 3 == 2);
      if (f % 3 == 2) begin adc_valid = 0; repeat (5) @(negedge clk); end
    end
    adc_valid = 0;
    repeat (600) @(negedge clk);
    checks++;
    if (frames_out != NFRAMES) begin failures++; $display("FAIL %0d frames out", frames_out); end
    $display("mechanisms: systematic %0d, non-systematic %0d, SNR changes %0d, reloaded entry used %0d, back-to-back %0d, gaps %0d, corrected frames %0d",
             n_sys, n_nsys, n_snr_change, n_lut_used, n_b2b, n_gap, n_corrected);
    if (n_sys == 0)        begin failures++; $display("FAIL no systematic frame"); end
    if (n_nsys == 0)       begin failures++; $display("FAIL no non-systematic frame"); end
    if (n_snr_change == 0) begin failures++; $display("FAIL no SNR change"); end
    if (n_lut_used == 0)   begin failures++; $display("FAIL reloaded entry never used"); end
    if (n_b2b == 0)        begin failures++; $display("FAIL no back-to-back codewords"); end
    if (n_gap == 0)        begin failures++; $display("FAIL no gap"); end
    if (n_corrected == 0)  begin failures++; $display("FAIL no corrected frame"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
