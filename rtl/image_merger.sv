// image_merger: puts decoded N x N subblocks back together into a
// raster-scanned IMG_W x IMG_H image; the mirror of image_segmenter.
//
// Blocks arrive in the segmenter's order (left to right along a strip of N
// rows, strips top to bottom), each in raster order. A strip buffer of N
// image rows is filled with IMG_W/N blocks, then drained row by row in
// raster order while the input is held off. out_frame_end marks the image's
// last pixel.
//
// Interface: valid/ready streams of PIX_W-bit pixels; IMG_W and IMG_H must
// be multiples of N.
// Timing: N*IMG_W fill cycles then N*IMG_W drain cycles per strip at full
// rate. The paper shows the reassembled decompressed image but does not
// describe this unit; all of it is this design's own.
module image_merger #(
  parameter int IMG_W = 256,
  parameter int IMG_H = 256,
  parameter int N     = 8,
  parameter int PIX_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PIX_W-1:0] in_pix,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [PIX_W-1:0] out_pix,
  output logic             out_frame_end
);

  localparam int NB  = IMG_W / N;
  localparam int NS  = IMG_H / N;
  localparam int IW  = $clog2(N);
  localparam int XW  = $clog2(IMG_W);
  localparam int BW  = (NB > 1) ? $clog2(NB) : 1;
  localparam int SW  = (NS > 1) ? $clog2(NS) : 1;

  typedef enum logic {S_FILL, S_DRAIN} state_t;

  state_t             state;
  logic [PIX_W-1:0]   mem [N][IMG_W];
  logic [IW-1:0]      r, c;     // row in strip; column in block (fill)
  logic [XW-1:0]      x;        // column in image (drain)
  logic [BW-1:0]      b;        // block in strip (fill)
  logic [SW-1:0]      s;        // strip in image
  logic [XW-1:0]      wr_x;
  logic               c_end, r_end, x_end, b_end, s_end;

  assign c_end = (c == IW'(N - 1));
  assign r_end = (r == IW'(N - 1));
  assign x_end = (x == XW'(IMG_W - 1));
  assign b_end = (b == BW'(NB - 1));
  assign s_end = (s == SW'(NS - 1));

  assign wr_x          = XW'(b * N + c);
  assign in_ready      = (state == S_FILL);
  assign out_valid     = (state == S_DRAIN);
  assign out_pix       = mem[r][x];
  assign out_frame_end = out_valid && r_end && x_end && s_end;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[r][wr_x] <= in_pix;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_FILL;
      r <= '0; c <= '0; x <= '0; b <= '0; s <= '0;
    end else begin
      unique case (state)
        S_FILL: if (in_valid) begin
          c <= c + 1'b1;
          if (c_end) begin
            r <= r + 1'b1;
            if (r_end) begin
              b <= b_end ? '0 : b + 1'b1;
              if (b_end) state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: if (out_ready) begin
          x <= x_end ? '0 : x + 1'b1;
          if (x_end) begin
            r <= r + 1'b1;
            if (r_end) begin
              state <= S_FILL;
              s <= s_end ? '0 : s + 1'b1;
            end
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_pix));

endmodule
