// tb_encoder_selector: for random decided words and every pair index j,
// each layer's partial sums must equal the recursive polar transform of the
// left sibling block of the node on j's path (zeros above the block size).
module tb_encoder_selector;
  import vlc_pkg::*;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  word_t u_hat;
  logic [6:0] j;
  logic [N/2-1:0] ps [LOG2N-1];

  encoder_selector dut (.*);

  initial begin
    for (int t = 0; t < 4; t++) begin
      for (int w = 0; w < 8; w++) u_hat[w*32 +: 32] = $urandom;
      for (int jj = 0; jj < 128; jj++) begin
        j = 7'(jj);
        #1;
        for (int k = 1; k < 8; k++) begin
          int S, start;
          bitq_t blk, x;
          logic [N/2-1:0] e;
          S = 256 >> k;
          blk.delete();
          start = ((jj >> (7 - k)) / 2) * 2 * S;
          for (int i = 0; i < S; i++) blk.push_back(u_hat[start + i]);
          x = enc_rec(blk);
          e = '0;
          for (int i = 0; i < S; i++) e[i] = x[i];
          checks++;
          if (ps[k-1] != e) begin
            failures++;
            if (failures < 10) $display("FAIL j=%0d layer %0d", jj, k);
          end
        end
      end
    end
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
