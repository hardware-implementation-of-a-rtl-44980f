// tb_descrambler: frames scrambled by the reference scrambler (LFSR
// x^15+x^14+1, seed all ones) must come out as the original data, one cycle
// later, including frames with idle gaps; also checks the LFSR sequence
// itself against a direct recurrence s[n] = s[n-14] ^ s[n-15].
module tb_descrambler;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_bit = 0, in_first = 0, in_last = 0;
  logic out_valid, out_bit, out_first, out_last;

  descrambler dut (.*);

  always #5 clk = ~clk;

  task automatic frame(input msg_t m, input bit gaps, input msg_t expect_out);
    msg_t s;
    s = scramble(m);
    for (int i = 0; i < int'(K); i++) begin
      if (gaps && $urandom_range(0, 2) == 0) begin
        in_valid = 0; @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL valid during gap"); end
      end
      in_valid = 1; in_bit = s[i]; in_first = (i == 0); in_last = (i == int'(K) - 1);
      @(negedge clk);
      checks++;
      if (!out_valid || out_bit != expect_out[i] || out_first != (i == 0) || out_last != (i == int'(K) - 1)) begin
        failures++;
        $display("FAIL bit %0d got %0d exp %0d", i, out_bit, expect_out[i]);
      end
    end
    in_valid = 0; in_first = 0; in_last = 0;
    @(negedge clk);
  endtask

  initial begin
    msg_t m, z, seq;
    bit sq [K + 15];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // all-zero data: the output is the scrambling sequence itself
    for (int i = 0; i < 15; i++) sq[i] = 1'b1;           // seed, oldest first
    for (int n = 15; n < int'(K) + 15; n++) sq[n] = sq[n-14] ^ sq[n-15];
    for (int i = 0; i < int'(K); i++) seq[i] = sq[i + 15];
    z = '0;
    // feed the sequence unscrambled: the descrambler output is data ^ seq
    begin
      for (int i = 0; i < int'(K); i++) begin
        in_valid = 1; in_bit = 1'b0; in_first = (i == 0); in_last = 0;
        @(negedge clk);
        checks++;
        if (out_bit != seq[i]) begin failures++; $display("FAIL sequence bit %0d", i); end
      end
      in_valid = 0; @(negedge clk);
    end
    for (int t = 0; t < 4; t++) begin
      for (int w = 0; w < 5; w++) m[w*32 +: 32] = $urandom;
      frame(m, bit'(t % 2), m);
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
