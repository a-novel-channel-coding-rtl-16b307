// hamming_dec: single-error-correcting Hamming decoder, the receiver-side
// counterpart of hamming_enc (same K, R, NC and bit positions).
//
// Every parity check j is recomputed over all positions whose number has bit
// j set, the parity bit included. The failing checks, read as a binary number,
// form the syndrome: the sum of the positions of the failing parity bits,
// which is the position of a single flipped bit. That bit is inverted and the
// data bits are taken from the non-power-of-two positions. A syndrome of 0
// means no error; one that points past NC cannot come from a single error, so
// the word is flagged uncorrectable and passed on unchanged. A double error
// usually gives a valid-looking syndrome and is then miscorrected: the code
// the paper builds has no overall parity bit. Syndrome decoding follows the
// paper; the uncorrectable flag is this design's addition.
//
// Interface: code in (code[p-1] = position p); data, syndrome, corrected
// (a single error was fixed) and uncorrectable out. Purely combinational.
module hamming_dec
  import pit_pkg::*;
#(
  parameter int K = 9
) (
  input  logic [pit_pkg::hamming_n(K)-1:0] code,
  output logic [K-1:0]                     data,
  output logic [pit_pkg::hamming_r(K)-1:0] syndrome,
  output logic                             corrected,
  output logic                             uncorrectable
);

  localparam int R  = hamming_r(K);
  localparam int NC = K + R;

  logic [NC:1] w;
  logic [NC:1] fixed;

  always_comb begin
    w = code;
    syndrome = '0;
    for (int j = 0; j < R; j++)
      for (int p = 1; p <= NC; p++)
        if (((p >> j) & 1) == 1) syndrome[j] = syndrome[j] ^ w[p];

    corrected     = 1'b0;
    uncorrectable = 1'b0;
    fixed         = w;
    if (syndrome != '0) begin
      if (int'(syndrome) <= NC) begin
        corrected = 1'b1;
        for (int p = 1; p <= NC; p++)
          if (int'(syndrome) == p) fixed[p] = ~w[p];
      end else begin
        uncorrectable = 1'b1;
      end
    end

  end

  for (genvar i = 0; i < K; i++) begin : g_data
    assign data[i] = fixed[data_pos(i)];
  end

endmodule
