// haar2d_inv: inverse 2-D multi-level Haar wavelet transform of one N x N
// coefficient block, giving back the decompressed subblock.
//
// Coefficients are loaded in raster order into an N x N register array, as
// haar2d_fwd sends them, sign-extended by 2*LEVELS bits so that no step of
// the inverse can overflow (a value one step past 2^PIX_W - 1 would otherwise
// wrap round to a negative one). The forward order is undone in reverse: first every
// column goes through a shared combinational haar1d_inv (one column per
// clock), then every row (one row per clock). The pixels are sent in raster
// order, clamped to 0 .. 2^PIX_W-1: the integer transform can bring a pixel
// of value 0 back as -1, and a word the channel code could not correct can
// bring anything.
//
// Interface: valid/ready streams as in haar2d_fwd; out_last marks the
// block's last pixel.
// Timing per block: N*N input cycles, exactly 2*N transform cycles, N*N
// output cycles; no overlap. The paper names the inverse transform; schedule,
// clamping, handshake and synchronous active-low reset are this design's own.
module haar2d_inv
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
  input  logic signed [COEF_W-1:0] in_coef,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic        [PIX_W-1:0]  out_pix,
  output logic                     out_last
);

  localparam int IW = $clog2(N);
  // Internal width: each of the 2*LEVELS inverse steps can at most double a
  // magnitude, so AW bits never wrap, whatever coefficients arrive.
  localparam int AW = COEF_W + 2 * LEVELS;
  localparam logic signed [AW-1:0] PMAX = AW'((1 << PIX_W) - 1);

  typedef enum logic [1:0] {S_LOAD, S_COL, S_ROW, S_SEND} state_t;

  state_t                   state;
  logic signed [AW-1:0]     blk [N][N];
  logic        [IW-1:0]     r, c;
  logic signed [AW-1:0]     line_in  [N];
  logic signed [AW-1:0]     line_out [N];
  logic signed [AW-1:0]     cur;
  logic                     r_end, c_end;

  haar1d_inv #(.N(N), .LEVELS(LEVELS), .COEF_W(AW)) u_line (
    .x(line_in), .y(line_out)
  );

  assign r_end = (r == IW'(N - 1));
  assign c_end = (c == IW'(N - 1));

  always_comb begin
    for (int i = 0; i < N; i++)
      line_in[i] = (state == S_COL) ? blk[i][c] : blk[r][i];
  end

  assign cur       = blk[r][c];
  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_SEND);
  assign out_last  = (state == S_SEND) && r_end && c_end;

  always_comb begin
    if (cur < 0)         out_pix = '0;
    else if (cur > PMAX) out_pix = '1;
    else                 out_pix = cur[PIX_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      r     <= '0;
      c     <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          blk[r][c] <= AW'(in_coef);
          c <= c + 1'b1;
          if (c_end) begin
            r <= r + 1'b1;
            if (r_end) state <= S_COL;
          end
        end
        S_COL: begin
          for (int i = 0; i < N; i++) blk[i][c] <= line_out[i];
          c <= c + 1'b1;
          if (c_end) state <= S_ROW;
        end
        S_ROW: begin
          blk[r] <= line_out;
          r <= r + 1'b1;
          if (r_end) state <= S_SEND;
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

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_pix));

endmodule
