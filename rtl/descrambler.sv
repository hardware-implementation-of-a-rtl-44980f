// descrambler: additive descrambler for the pre-scrambled beacon frames.
//
// A 15-stage LFSR with the generating polynomial P(x) = x^15 + x^14 + 1
// produces a pseudo-random sequence p = r[14] ^ r[13]; the register shifts
// r <= {r[13:0], p} on every valid bit and p is XORed with the received bit.
// The transmitter's scrambler runs the same LFSR from the same seed, so the
// XOR restores the frame. in_first (the first bit of a frame) reloads the
// seed, so every frame is descrambled independently. The output is
// registered: out_* follow in_* by one cycle.
//
// The polynomial and the LFSR-plus-XOR structure follow the paper. The seed
// (all ones) and the per-frame restart are this design's choices: the paper
// gives neither.
module descrambler #(
  parameter logic [14:0] SEED = 15'h7FFF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_bit,
  input  logic in_first,
  input  logic in_last,
  output logic out_valid,
  output logic out_bit,
  output logic out_first,
  output logic out_last
);

  logic [14:0] r, cur;
  logic        p;

  assign cur = in_first ? SEED : r;
  assign p   = cur[14] ^ cur[13];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r         <= SEED;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid & in_first;
      out_last  <= in_valid & in_last;
      if (in_valid) begin
        r       <= {cur[13:0], p};
        out_bit <= in_bit ^ p;
      end
    end
  end

endmodule
