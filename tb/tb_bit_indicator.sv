// tb_bit_indicator: recomputes the polarization-weight information set with
// real arithmetic (PW(i) = sum 2^(b/4) over the set bits b of i, 158 largest)
// and compares it with the mask and with the per-pair flags for every pair.
// Also checks that the set is closed under bit domination (needed by the
// two-pass systematic encoder).
module tb_bit_indicator;
  import vlc_pkg::*;

  int checks = 0, failures = 0;
  logic [6:0] j;
  logic [1:0] info_pair;
  word_t info_mask;
  word_t exp_mask;

  bit_indicator dut (.*);

  initial begin
    real pw [256];
    for (int i = 0; i < 256; i++) begin
      pw[i] = 0.0;
      for (int b = 0; b < 8; b++) if (i[b]) pw[i] += 2.0 ** (b / 4.0);
    end
    for (int i = 0; i < 256; i++) begin
      int better;
      better = 0;
      for (int q = 0; q < 256; q++)
        if (pw[q] > pw[i] + 1e-9 || (pw[q] > pw[i] - 1e-9 && q > i)) better++;
      exp_mask[i] = (better < 158);
    end
    #1;
    checks++;
    if (info_mask != exp_mask) begin failures++; $display("FAIL mask %h exp %h", info_mask, exp_mask); end
    checks++;
    if ($countones(info_mask) != 158) failures++;
    for (int a = 0; a < 256; a++)
      for (int c = 0; c < 256; c++)
        if (info_mask[a] && ((a & c) == a)) begin
          checks++;
          if (!info_mask[c]) begin failures++; $display("FAIL %0d info but %0d frozen", a, c); end
        end
    for (int jj = 0; jj < 128; jj++) begin
      j = 7'(jj);
      #1;
      checks++;
      if (info_pair != {exp_mask[2*jj+1], exp_mask[2*jj]}) begin
        failures++; $display("FAIL pair %0d", jj);
      end
    end
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
