// tb_threshold_adjust: checks the seven thresholds for every SNR setting
// against the spacing rule thr[k] = 2048 + (k-3)*(320 - 16*snr), and that
// they are strictly ascending.
module tb_threshold_adjust;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  snr_t snr;
  adc_t thr [NTHR];

  threshold_adjust dut (.snr, .thr);

  initial begin
    for (int s = 0; s < 16; s++) begin
      snr = snr_t'(s);
      #1;
      for (int k = 0; k < 7; k++) begin
        checks++;
        if (int'(thr[k]) != ref_thr(s, k)) begin
          failures++;
          $display("FAIL snr=%0d k=%0d got %0d exp %0d", s, k, thr[k], ref_thr(s, k));
        end
        if (k > 0) begin
          checks++;
          if (!(thr[k] > thr[k-1])) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
