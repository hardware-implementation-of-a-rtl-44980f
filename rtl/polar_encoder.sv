// polar_encoder: combinational polar transform x = u * F^(kron n) of SIZE
// bits, F = [1 0; 1 1], natural bit order: log2(SIZE) layers of SIZE/2 XORs.
// The decoder uses it to rebuild partial sums (sizes 128..2) and, for the
// systematic code, to re-encode the decided word (size 256).
module polar_encoder #(
  parameter int unsigned SIZE = 256
) (
  input  logic [SIZE-1:0] u,
  output logic [SIZE-1:0] x
);

  always_comb begin
    x = u;
    for (int s = 1; s < int'(SIZE); s = s * 2)
      for (int i = 0; i < int'(SIZE); i++)
        if ((i & s) == 0) x[i] = x[i] ^ x[i + s];
  end

endmodule
