// tb_comparator_bank: random samples against random ascending threshold
// sets plus samples exactly on each threshold; the one-hot output must
// mark the range given by counting the thresholds not above the sample.
module tb_comparator_bank;
  import vlc_pkg::*;

  int checks = 0, failures = 0;
  adc_t sample;
  adc_t thr [NTHR];
  logic [NCMP-1:0] sel;

  comparator_bank dut (.sample, .thr, .sel);

  task automatic check_one();
    int lvl;
    #1;
    lvl = 0;
    for (int k = 0; k < 7; k++) if (sample >= thr[k]) lvl = k + 1;
    checks++;
    if (sel != (8'b1 << lvl)) begin
      failures++;
      $display("FAIL sample=%0d sel=%b exp level %0d", sample, sel, lvl);
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      int base = $urandom_range(1, 1000);
      for (int k = 0; k < 7; k++) thr[k] = adc_t'(base + k * $urandom_range(50, 400) + k);
      for (int k = 1; k < 7; k++) if (thr[k] <= thr[k-1]) thr[k] = thr[k-1] + 1;
      for (int r = 0; r < 10; r++) begin
        sample = adc_t'($urandom_range(0, 4095));
        check_one();
      end
      for (int k = 0; k < 7; k++) begin
        sample = thr[k];     check_one();
        sample = thr[k] - 1; check_one();
      end
    end
    sample = 0;     check_one();
    sample = 4095;  check_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
