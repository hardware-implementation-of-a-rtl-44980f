// tb_p2s: loads random 158-bit words (back to back and with gaps) and checks
// the serial order, the first/last flags and the 158-cycle burst length.
module tb_p2s;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic load = 0;
  logic [157:0] word = '0;
  logic out_valid, out_bit, out_first, out_last;

  p2s dut (.*);

  always #5 clk = ~clk;

  task automatic send(input int gap);
    logic [157:0] w;
    for (int q = 0; q < 5; q++) w[q*32 +: 32] = $urandom;
    @(negedge clk);
    load = 1; word = w;
    @(negedge clk);
    load = 0;
    for (int i = 0; i < 158; i++) begin
      checks++;
      if (!out_valid || out_bit != w[i] || out_first != (i == 0) || out_last != (i == 157)) begin
        failures++;
        $display("FAIL bit %0d v=%0d b=%0d f=%0d l=%0d", i, out_valid, out_bit, out_first, out_last);
      end
      if (i != 157) @(negedge clk);
    end
    if (gap > 0) begin
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL burst too long"); end
      repeat (gap - 1) @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (out_valid) failures++;
    send(3);
    send(0);
    send(1);
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
