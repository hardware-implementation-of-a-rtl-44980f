// tb_sc_polar_decoder: random 158-bit messages, polar-encoded
// non-systematically or systematically, sent as 5-bit LLRs that are clean,
// lightly noisy or heavily noisy. Every decoded message must equal the
// reference recursive SC decoder's, clean and lightly noisy frames must
// return the sent message, out_valid must come exactly 130 cycles after the
// frame is accepted, and ready must stay low in between.
module tb_sc_polar_decoder;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  llr_t llr_in [N];
  logic systematic = 0;
  logic ready, out_valid;
  msg_t msg_out;
  int n_sys = 0, n_nsys = 0, n_err_frames = 0;

  sc_polar_decoder dut (.*);

  always #5 clk = ~clk;

  task automatic run(input bit sys, input int noise);
    msg_t m, e;
    word_t x;
    int l [N];
    int lat;
    for (int w = 0; w < 5; w++) m[w*32 +: 32] = $urandom;
    x = sys ? spe(m) : nspe(m);
    if (sys) begin
      checks++;
      if (pick(x) != m) begin failures++; $display("FAIL systematic model"); end
    end
    for (int i = 0; i < int'(N); i++) begin
      int v;
      v = x[i] ? -int'($urandom_range(3, 15)) : int'($urandom_range(3, 15));
      if (noise == 1 && $urandom_range(0, 15) == 0) v = -v / 3;              // few weak flips
      if (noise == 2) v = int'($urandom_range(0, 30)) - 15;                  // garbage
      l[i] = v;
      llr_in[i] = llr_t'(v);
    end
    e = ref_decode(l, sys);
    wait (ready);
    @(negedge clk);
    in_valid = 1; systematic = sys;
    @(negedge clk);
    in_valid = 0; systematic = !sys;   // mode must be sampled with the frame
    lat = 1;
    while (!out_valid) begin
      checks++;
      if (ready) begin failures++; $display("FAIL ready while decoding"); end
      @(negedge clk);
      lat++;
      if (lat > 1000) break;
    end
    checks++;
    if (lat != 130) begin failures++; $display("FAIL latency %0d", lat); end
    checks++;
    if (msg_out != e) begin failures++; $display("FAIL decoded != reference (sys=%0d noise=%0d)", sys, noise); end
    if (noise < 2) begin
      checks++;
      if (msg_out != m) begin
        n_err_frames++;
        if (noise == 0) begin failures++; $display("FAIL clean frame not recovered"); end
        else checks--;   // a light-noise frame may legitimately fail; counted only
      end
    end
    if (sys) n_sys++; else n_nsys++;
  endtask

  initial begin
    for (int i = 0; i < int'(N); i++) llr_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) run(bit'(t % 2), t % 3);
    checks++;
    if (n_sys == 0 || n_nsys == 0) failures++;
    $display("frames: %0d systematic, %0d non-systematic, %0d light-noise frames not recovered",
             n_sys, n_nsys, n_err_frames);
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
