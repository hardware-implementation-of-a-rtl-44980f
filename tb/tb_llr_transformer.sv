// tb_llr_transformer: streams frames of random 9-bit LLRs (with idle gaps
// and an sof restart part-way through a frame); checks the 5-bit scaling of
// every position, that frame_valid comes exactly one cycle after the 256th
// value, and that it comes once per frame.
module tb_llr_transformer;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  lut_llr_t in_llr = '0;
  llr_t llr_out [N];
  logic frame_valid;
  int exp_llr [N];
  int fv_count = 0;

  llr_transformer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (frame_valid) fv_count++;

  task automatic send_frame(input bit gaps, input int restart_at);
    for (int i = 0; i < int'(N); i++) begin
      int v;
      if (gaps && ($urandom_range(0, 3) == 0)) begin
        in_valid = 0; @(negedge clk);
      end
      v = $urandom_range(0, 511) - 256;
      in_valid = 1; in_sof = (i == 0); in_llr = lut_llr_t'(v);
      exp_llr[i] = ref_scale(v);
      @(negedge clk);
      if (i == restart_at) begin
        // an sof part-way through: the frame begins again
        i = -1;
        restart_at = -1;
      end
      checks++;
      if (frame_valid != 1'b0 && i != int'(N) - 1) begin
        failures++; $display("FAIL early frame_valid at %0d", i);
      end
    end
    in_valid = 0;
    // now in the cycle after the 256th value
    checks++;
    if (!frame_valid) begin failures++; $display("FAIL frame_valid missing"); end
    for (int i = 0; i < int'(N); i++) begin
      checks++;
      if (int'(llr_out[i]) != exp_llr[i]) begin
        failures++;
        $display("FAIL pos %0d got %0d exp %0d", i, llr_out[i], exp_llr[i]);
      end
    end
    @(negedge clk);
    checks++;
    if (frame_valid) begin failures++; $display("FAIL frame_valid longer than a cycle"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send_frame(0, -1);
    send_frame(1, -1);
    send_frame(0, 100);
    checks++;
    if (fv_count != 3) begin failures++; $display("FAIL %0d frames signalled", fv_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
