// tb_soft_decision_filter: OOK samples with noise at several SNR settings
// (including the ADC extremes and samples exactly on thresholds) go through
// the filter; every output LLR must equal the reference mapping
// (threshold rule, paper table in Q2.7, 9-to-5-bit scaling), and the frame
// must be flagged exactly one cycle after its 256th sample. A table write
// then changes one level of one bank and a second frame checks it is used.
module tb_soft_decision_filter;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  adc_t in_data = '0;
  snr_t snr = '0;
  logic lut_wr_en = 0;
  logic [LUT_AW-1:0] lut_wr_addr = '0;
  lut_llr_t lut_wr_data = '0;
  llr_t llr_out [N];
  logic frame_valid;
  int expv [N];
  int override_addr = -1, override_val = 0;

  soft_decision_filter dut (.*);

  always #5 clk = ~clk;

  task automatic run_frame(input int s);
    snr = snr_t'(s);
    for (int i = 0; i < int'(N); i++) begin
      int smp, lvl, v9;
      case (i % 16)
        0: smp = 0;
        1: smp = 4095;
        2: smp = ref_thr(s, i % 7);
        default: smp = int'(ook_sample(bit'($urandom_range(0, 1)), 700, 500));
      endcase
      lvl = ref_level(smp, s);
      v9  = (override_addr == s * 8 + lvl) ? override_val : ref_llr9(lvl);
      expv[i] = ref_scale(v9);
      in_valid = 1; in_sof = (i == 0); in_data = adc_t'(smp);
      @(negedge clk);
      checks++;
      if (frame_valid && i != int'(N) - 1) begin failures++; $display("FAIL early frame_valid"); end
    end
    in_valid = 0; in_sof = 0;
    checks++;
    if (!frame_valid) begin failures++; $display("FAIL frame_valid missing"); end
    for (int i = 0; i < int'(N); i++) begin
      checks++;
      if (int'(llr_out[i]) != expv[i]) begin
        failures++;
        $display("FAIL snr %0d pos %0d got %0d exp %0d", s, i, llr_out[i], expv[i]);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_frame(0);
    run_frame(7);
    run_frame(15);
    // reload level 6 of bank 9 with -100 (-> -12 after scaling)
    lut_wr_en = 1; lut_wr_addr = LUT_AW'(9 * 8 + 6); lut_wr_data = -9'sd100;
    @(negedge clk);
    lut_wr_en = 0;
    override_addr = 9 * 8 + 6; override_val = -100;
    run_frame(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
