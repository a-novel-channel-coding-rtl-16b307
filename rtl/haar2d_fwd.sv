// haar2d_fwd: forward 2-D multi-level Haar wavelet transform of one N x N
// subblock (the "row-wise" then "column-wise" transform of the paper).
//
// The block is held in an N x N register array. It is loaded one pixel per
// accepted input, in raster order (row 0 left to right first). Then every row
// goes once through a shared combinational haar1d_fwd (full LEVELS-level 1-D
// transform, one row per clock), and after that every column (one column per
// clock). This gives the separable (standard) decomposition that the paper's
// row-wise / column-wise result pictures show. The coefficients are then sent
// out in raster order of the transformed block, so the coarsest average
// (the block's DC value) comes first.
//
// Interface: valid/ready streams. in_pix is taken when in_valid && in_ready;
// out_coef is taken when out_valid && out_ready, out_last marks the block's
// last coefficient. Input and output must not change while valid is high and
// ready low.
// Timing per block: N*N input cycles, then exactly 2*N transform cycles
// (out_valid rises 2*N clocks after the clock that took the last pixel),
// then N*N output cycles; blocks are not overlapped. The schedule, the
// handshake and the synchronous active-low reset are this design's own
// choices; the paper only gives the transform.
module haar2d_fwd
  import pit_pkg::*;
#(
  parameter int N      = pit_pkg::BLK_N,
  parameter int LEVELS = pit_pkg::NUM_LEVELS,
  parameter int PIX_W  = pit_pkg::PIX_BITS,
  parameter int COEF_W = pit_pkg::COEF_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic        [PIX_W-1:0]  in_pix,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [COEF_W-1:0] out_coef,
  output logic                     out_last
);

  localparam int IW = $clog2(N);

  typedef enum logic [1:0] {S_LOAD, S_ROW, S_COL, S_SEND} state_t;

  state_t                   state;
  logic signed [COEF_W-1:0] blk [N][N];
  logic        [IW-1:0]     r, c;      // row / column counters
  logic signed [COEF_W-1:0] line_in  [N];
  logic signed [COEF_W-1:0] line_out [N];
  logic                     r_end, c_end;

  haar1d_fwd #(.N(N), .LEVELS(LEVELS), .COEF_W(COEF_W)) u_line (
    .x(line_in), .y(line_out)
  );

  assign r_end = (r == IW'(N - 1));
  assign c_end = (c == IW'(N - 1));

  always_comb begin
    for (int i = 0; i < N; i++)
      line_in[i] = (state == S_COL) ? blk[i][c] : blk[r][i];
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_SEND);
  assign out_coef  = blk[r][c];
  assign out_last  = (state == S_SEND) && r_end && c_end;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      r     <= '0;
      c     <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          blk[r][c] <= COEF_W'($signed({1'b0, in_pix}));
          c <= c + 1'b1;
          if (c_end) begin
            r <= r + 1'b1;
            if (r_end) state <= S_ROW;
          end
        end
        S_ROW: begin
          blk[r] <= line_out;
          r <= r + 1'b1;
          if (r_end) state <= S_COL;
        end
        S_COL: begin
          for (int i = 0; i < N; i++) blk[i][c] <= line_out[i];
          c <= c + 1'b1;
          if (c_end) state <= S_SEND;
        end
        S_SEND: if (out_ready) begin
          c <= c + 1'b1;
          if (c_end) begin
            r <= r + 1'b1;
            if (r_end) state <= S_LOAD;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // A block must hold its output while the receiver stalls it.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_coef));

endmodule
