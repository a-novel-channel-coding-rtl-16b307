// hamming_enc: single-error-correcting Hamming encoder for K data bits.
//
// Codeword bits are numbered from 1 to NC = K + R, where R is the smallest
// number with 2^R >= K + R + 1 (K = 9 gives R = 4, NC = 13; the paper's
// example K = 7 gives the (11,7) code). Positions that are powers of two hold
// parity bits, all others hold data bits, data bit 0 at the lowest such
// position (3), then upward. Parity bit 2^j is the even parity of every
// other position whose number has bit j set. The construction is the
// paper's; even parity and the data-bit order are this design's choice.
//
// Interface: data in, code out with code[p-1] = codeword position p.
// Purely combinational. The code is systematic: the K data positions of the
// codeword are the data inputs wired straight through, only the R parity
// bits are computed.
module hamming_enc
  import pit_pkg::*;
#(
  parameter int K = 9
) (
  input  logic [K-1:0]                 data,
  output logic [pit_pkg::hamming_n(K)-1:0] code
);

  localparam int R  = hamming_r(K);
  localparam int NC = K + R;

  logic [NC:1] d;    // data bits at their codeword positions, parity 0
  logic [NC:1] w;    // w[p] = codeword position p

  for (genvar p = 1; p <= NC; p++) begin : g_pos
    if (is_pow2(p)) begin : g_par
      assign d[p] = 1'b0;
    end else begin : g_dat
      assign d[p] = data[p - 1 - $clog2(p + 1)];   // data bit index at p
    end
  end

  always_comb begin
    w = d;
    for (int j = 0; j < R; j++) begin
      for (int p = 1; p <= NC; p++)
        if (((p >> j) & 1) == 1 && p != (1 << j)) w[1 << j] = w[1 << j] ^ d[p];
    end
    code = w;
  end

endmodule
