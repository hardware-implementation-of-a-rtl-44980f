// llr_transformer: turns the stream of 9-bit LLRs from the lookup table into
// the 256 parallel 5-bit LLRs (oLLR_0 .. oLLR_255) of the polar decoder.
//
// Width conversion: the Q2.7 LLR is divided by 8 with rounding and
// saturated to +-15, llr5 = sat15((llr9 + 4) >>> 3). For the paper's table
// this gives -15 -6 -3 -1 1 4 6 15.
// Framing: each valid LLR is written to position cnt of the output register
// and cnt counts 0..255; 'sof' with a valid LLR restarts the frame at
// position 0. When position 255 is written, frame_valid is high for one
// cycle in the next clock, with the complete frame on llr_out. The next frame
// starts filling in that same cycle; llr_out[0] changes only at its end.
//
// The paper gives the 9-bit input, the 256 5-bit outputs and the name; the
// scaling rule, the counter and the sof input are this design's choices.
module llr_transformer
  import vlc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      in_sof,
  input  lut_llr_t  in_llr,
  output llr_t      llr_out [N],
  output logic      frame_valid
);

  localparam logic signed [LUT_W:0] LMAX = (LUT_W+1)'((1 << (LLR_W - 1)) - 1);  // 15

  logic [LOG2N-1:0] cnt, pos;
  llr_t             q;

  function automatic llr_t scale(input lut_llr_t v);
    logic signed [LUT_W:0] r;
    r = ((LUT_W+1)'(v) + (LUT_W+1)'(4)) >>> 3;
    if (r > LMAX)       return llr_t'(LMAX);
    else if (r < -LMAX) return llr_t'(-LMAX);
    else                return llr_t'(r);
  endfunction

  assign q   = scale(in_llr);
  assign pos = in_sof ? '0 : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt         <= '0;
      frame_valid <= 1'b0;
      for (int i = 0; i < int'(N); i++) llr_out[i] <= '0;
    end else begin
      frame_valid <= 1'b0;
      if (in_valid) begin
        llr_out[pos] <= q;
        cnt          <= pos + 1'b1;
        frame_valid  <= (pos == LOG2N'(N - 1));
      end
    end
  end

endmodule
