// encoder_selector: partial sums for the g-PEs of decoding layers 1..7.
//
// The decoder decides two bits per clock, pair j = 0..127 (bits 2j, 2j+1).
// In layer k (output size S = 256 >> k) the node on the path to pair j is a
// right child exactly when j[7-k] is 1; its g-PEs then need the re-encoded
// bits of the left sibling, x = polar_transform(u_hat[start +: S]) with
// start = ((j >> (7-k)) & ~1) * S. One encoder per size 128, 64, ..., 2
// does this; ps[k-1][S-1:0] carries the result for layer k (bits above S
// are zero). Combinational.
//
// The paper shows an 'Encoder selector' with encoders 128, 64, 32, 16, 8, 4
// and 2 inside the scheduling control; how it addresses the decided bits is
// this design's own reading of that diagram.
module encoder_selector
  import vlc_pkg::*;
(
  input  word_t               u_hat,     // decided bits (only those before pair j are used)
  input  logic [LOG2N-2:0]    j,         // current pair index
  output logic [N/2-1:0]      ps [LOG2N-1]
);

  for (genvar k = 1; k < LOG2N; k++) begin : g_enc
    localparam int unsigned S = N >> k;
    logic [LOG2N-1:0] start;
    logic [S-1:0]     blk, enc;
    assign start = LOG2N'(((int'(j) >> (7 - k)) & ~1) * int'(S));
    assign blk   = u_hat[start +: S];
    polar_encoder #(.SIZE(S)) u_enc (.u(blk), .x(enc));
    if (S == N/2) begin : g_full
      assign ps[k-1] = enc;
    end else begin : g_pad
      assign ps[k-1] = {{(N/2-S){1'b0}}, enc};
    end
  end

endmodule
