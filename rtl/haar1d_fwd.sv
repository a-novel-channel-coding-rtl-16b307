// haar1d_fwd: combinational multi-level forward 1-D Haar transform of one
// line of N samples.
//
// Level l works on the first L = N >> l entries of the line: each pair
// (a, b) = (x[2i], x[2i+1]) gives the average m = floor((a+b)/2), written to
// entry i, and the difference d = a - m, written to entry L/2 + i; entries
// from L on are left as they are. The next level repeats this on the first
// half. This is the averaging/differencing procedure of the paper; rounding
// the average down (so the pair sum's LSB is dropped) is this design's choice
// and is the source of the transform's small loss.
//
// Interface: x[] in, y[] out, both COEF_W-bit signed, purely combinational
// (no clock). N must be a power of two with N >= 2^LEVELS.
module haar1d_fwd #(
  parameter int N      = 8,
  parameter int LEVELS = 3,
  parameter int COEF_W = 9
) (
  input  logic signed [COEF_W-1:0] x [N],
  output logic signed [COEF_W-1:0] y [N]
);

  logic signed [COEF_W-1:0] v   [LEVELS+1][N];
  logic signed [COEF_W:0]   sum [LEVELS][N/2];
  logic signed [COEF_W-1:0] avg [LEVELS][N/2];

  always_comb begin
    v[0] = x;
    for (int l = 0; l < LEVELS; l++) begin
      v[l+1] = v[l];
      for (int i = 0; i < N / 2; i++) begin
        sum[l][i] = '0;
        avg[l][i] = '0;
      end
      for (int i = 0; i < (N >> l) / 2; i++) begin
        sum[l][i] = {v[l][2*i][COEF_W-1], v[l][2*i]} + {v[l][2*i+1][COEF_W-1], v[l][2*i+1]};
        avg[l][i] = sum[l][i][COEF_W:1];                  // floor((a+b)/2)
        v[l+1][i]                = avg[l][i];
        v[l+1][(N >> l) / 2 + i] = v[l][2*i] - avg[l][i];  // a - average
      end
    end
    y = v[LEVELS];
  end

endmodule
