// tb_mapping_lut: after reset every bank must hold the paper's table
// (converted to Q2.7 independently, from the real values); then random
// writes are read back and a shadow copy checks that no other entry moved.
module tb_mapping_lut;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  snr_t snr;
  logic [NCMP-1:0] sel;
  lut_llr_t llr;
  logic wr_en = 0;
  logic [LUT_AW-1:0] wr_addr = '0;
  lut_llr_t wr_data = '0;
  int shadow [128];

  mapping_lut dut (.*);

  always #5 clk = ~clk;

  task automatic read_all();
    for (int a = 0; a < 128; a++) begin
      snr = snr_t'(a / 8);
      sel = 8'b1 << (a % 8);
      #1;
      checks++;
      if (int'(llr) != shadow[a]) begin
        failures++;
        $display("FAIL addr %0d got %0d exp %0d", a, llr, shadow[a]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 128; a++) shadow[a] = ref_llr9(a % 8);
    snr = '0; sel = 8'b1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    read_all();
    for (int w = 0; w < 40; w++) begin
      @(negedge clk);
      wr_en = 1;
      wr_addr = LUT_AW'($urandom_range(0, 127));
      wr_data = lut_llr_t'($urandom_range(0, 511));
      shadow[wr_addr] = int'(wr_data);
    end
    @(negedge clk);
    wr_en = 0;
    read_all();
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
