// haar1d_inv: combinational multi-level inverse 1-D Haar transform of one
// line of N coefficients, the inverse of haar1d_fwd.
//
// Levels are undone from the coarsest (l = LEVELS-1, length L = N >> l) to
// the finest: the average m in entry i and the difference d in entry L/2 + i
// give back a = m + d in entry 2i and b = m - d in entry 2i+1. Entry a comes
// back exactly; b is one too small when the forward pair sum was odd, which
// is the only loss of the integer transform. The paper names the inverse
// transform; the butterfly is derived here from the forward one.
//
// Interface: x[] in, y[] out, COEF_W-bit signed, purely combinational.
module haar1d_inv #(
  parameter int N      = 8,
  parameter int LEVELS = 3,
  parameter int COEF_W = 9
) (
  input  logic signed [COEF_W-1:0] x [N],
  output logic signed [COEF_W-1:0] y [N]
);

  logic signed [COEF_W-1:0] v [LEVELS+1][N];

  always_comb begin
    v[LEVELS] = x;
    for (int l = LEVELS - 1; l >= 0; l--) begin
      v[l] = v[l+1];
      for (int i = 0; i < (N >> l) / 2; i++) begin
        v[l][2*i]   = v[l+1][i] + v[l+1][(N >> l) / 2 + i];
        v[l][2*i+1] = v[l+1][i] - v[l+1][(N >> l) / 2 + i];
      end
    end
    y = v[0];
  end

endmodule
