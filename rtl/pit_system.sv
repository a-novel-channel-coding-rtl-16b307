// pit_system: progressive image transmission link with Haar wavelet source
// transform and Hamming channel code; transmitter and receiver in one top.
//
// Transmitter: image_segmenter cuts the raster input image into N x N
// subblocks; haar2d_fwd applies the LEVELS-level 2-D Haar transform to each;
// hamming_enc turns each COEF_W-bit coefficient into one NC-bit codeword,
// sent on the tx port, one subblock after the other (tx_last ends a block).
// Receiver: codewords from the rx port are decoded by hamming_dec, which
// corrects any single bit error per codeword; haar2d_inv rebuilds each
// subblock and image_merger puts the image back in raster order.
// The noisy channel is outside: connect tx to rx through it (or directly).
//
// Interface: valid/ready streams pix_in -> tx (transmitter) and rx ->
// pix_out (receiver); the two halves share only clock and reset. Status:
// rx_corrected / rx_uncorrectable pulse for an accepted codeword that had a
// corrected bit / a syndrome outside the codeword; corrected_count and
// uncorrectable_count count them since reset.
// Timing: each stage works on one strip or block at a time, with no overlap
// inside a stage; at full rate a block spends N*N + 2N + N*N cycles in each
// transform unit. The order of the chain follows the paper; the interfaces,
// schedule and counters are this design's own. The segmenter's block and
// frame markers and the inverse unit's block marker are left unconnected:
// the units downstream count samples themselves.
module pit_system
  import pit_pkg::*;
#(
  parameter int IMG_W  = 256,
  parameter int IMG_H  = 256,
  parameter int N      = pit_pkg::BLK_N,
  parameter int LEVELS = pit_pkg::NUM_LEVELS,
  parameter int PIX_W  = pit_pkg::PIX_BITS,
  parameter int COEF_W = pit_pkg::COEF_BITS,
  localparam int NC    = pit_pkg::hamming_n(COEF_W),
  localparam int R     = pit_pkg::hamming_r(COEF_W)
) (
  input  logic             clk,
  input  logic             rst_n,
  // image in (raster order)
  input  logic             pix_in_valid,
  output logic             pix_in_ready,
  input  logic [PIX_W-1:0] pix_in,
  // codewords to the channel
  output logic             tx_valid,
  input  logic             tx_ready,
  output logic [NC-1:0]    tx_code,
  output logic             tx_last,
  // codewords from the channel
  input  logic             rx_valid,
  output logic             rx_ready,
  input  logic [NC-1:0]    rx_code,
  // decompressed image out (raster order)
  output logic             pix_out_valid,
  input  logic             pix_out_ready,
  output logic [PIX_W-1:0] pix_out,
  output logic             pix_out_frame_end,
  // receiver status
  output logic             rx_corrected,
  output logic             rx_uncorrectable,
  output logic [R-1:0]     rx_syndrome,
  output logic [31:0]      corrected_count,
  output logic [31:0]      uncorrectable_count
);

  // ---------------- transmitter ----------------
  logic                     seg_valid, seg_ready, seg_last, seg_frame_end;
  logic        [PIX_W-1:0]  seg_pix;
  logic signed [COEF_W-1:0] fwd_coef;

  image_segmenter #(.IMG_W(IMG_W), .IMG_H(IMG_H), .N(N), .PIX_W(PIX_W)) u_seg (
    .clk, .rst_n,
    .in_valid(pix_in_valid), .in_ready(pix_in_ready), .in_pix(pix_in),
    .out_valid(seg_valid), .out_ready(seg_ready), .out_pix(seg_pix),
    .out_last(seg_last), .out_frame_end(seg_frame_end)
  );

  haar2d_fwd #(.N(N), .LEVELS(LEVELS), .PIX_W(PIX_W), .COEF_W(COEF_W)) u_fwd (
    .clk, .rst_n,
    .in_valid(seg_valid), .in_ready(seg_ready), .in_pix(seg_pix),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_coef(fwd_coef),
    .out_last(tx_last)
  );

  hamming_enc #(.K(COEF_W)) u_enc (.data(fwd_coef), .code(tx_code));

  // ---------------- receiver ----------------
  logic        [COEF_W-1:0] dec_data;
  logic                     dec_corr, dec_uncorr;
  logic                     inv_valid, inv_ready, inv_last;
  logic        [PIX_W-1:0]  inv_pix;

  hamming_dec #(.K(COEF_W)) u_dec (
    .code(rx_code), .data(dec_data), .syndrome(rx_syndrome),
    .corrected(dec_corr), .uncorrectable(dec_uncorr)
  );

  haar2d_inv #(.N(N), .LEVELS(LEVELS), .PIX_W(PIX_W), .COEF_W(COEF_W)) u_inv (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_coef($signed(dec_data)),
    .out_valid(inv_valid), .out_ready(inv_ready), .out_pix(inv_pix),
    .out_last(inv_last)
  );

  image_merger #(.IMG_W(IMG_W), .IMG_H(IMG_H), .N(N), .PIX_W(PIX_W)) u_mrg (
    .clk, .rst_n,
    .in_valid(inv_valid), .in_ready(inv_ready), .in_pix(inv_pix),
    .out_valid(pix_out_valid), .out_ready(pix_out_ready), .out_pix(pix_out),
    .out_frame_end(pix_out_frame_end)
  );

  assign rx_corrected     = rx_valid && rx_ready && dec_corr;
  assign rx_uncorrectable = rx_valid && rx_ready && dec_uncorr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      corrected_count     <= '0;
      uncorrectable_count <= '0;
    end else begin
      if (rx_corrected)     corrected_count     <= corrected_count + 1;
      if (rx_uncorrectable) uncorrectable_count <= uncorrectable_count + 1;
    end
  end

endmodule
