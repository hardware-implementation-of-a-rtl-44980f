// polar_pe: processing element of the successive-cancellation decoder.
//
// With two LLRs a (upper half of a node) and b (lower half) it computes
//   f(a,b)   = sign(a)*sign(b)*min(|a|,|b|)          (g_sel = 0)
//   g(a,b,u) = b + a  if u = 0,  b - a  if u = 1      (g_sel = 1)
// where u is the partial-sum bit of the already decided left sibling. f is
// the usual min-sum approximation; g saturates to +-(2^(W-1)-1), so the most
// negative code never appears and |a| cannot overflow. Combinational.
//
// The paper names the PEs of its decoding layers only; the min-sum f, the
// saturation and the width W are this design's choices.
module polar_pe #(
  parameter int unsigned W = 7
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic                u,
  input  logic                g_sel,
  output logic signed [W-1:0] y
);

  localparam logic signed [W:0] MAXV = (W+1)'((1 << (W - 1)) - 1);

  logic [W-1:0]        abs_a, abs_b, mn;
  logic signed [W:0]   sum;

  always_comb begin
    abs_a = a[W-1] ? W'(-a) : W'(a);
    abs_b = b[W-1] ? W'(-b) : W'(b);
    mn    = (abs_a < abs_b) ? abs_a : abs_b;
    sum   = u ? ((W+1)'(b) - (W+1)'(a)) : ((W+1)'(b) + (W+1)'(a));
    if (!g_sel)          y = (a[W-1] ^ b[W-1]) ? -$signed(mn) : $signed(mn);
    else if (sum > MAXV) y = W'(MAXV);
    else if (sum < -MAXV) y = W'(-MAXV);
    else                 y = W'(sum);
  end

endmodule
