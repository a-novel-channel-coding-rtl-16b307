// tb_image_merger: sends two random 32x16 frames as N = 8 subblocks in the
// segmenter's order (blocks left to right, strips top to bottom, raster
// inside a block) with random gaps, takes the output with random stalls and
// checks that the image comes out in raster order with out_frame_end on the
// frame's last pixel; the full-rate drain of the first strip (N*IMG_W
// cycles) is checked too.
module tb_image_merger;

  localparam int W = 32, H = 16, N = 8, FR = 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_frame_end;
  logic [7:0] in_pix = 0, out_pix;

  image_merger #(.IMG_W(W), .IMG_H(H), .N(N), .PIX_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned img [FR][H][W];
  int in_cnt = 0, out_cnt = 0, cyc = 0, first_out = -1, strip_end = -1;
  int n_held = 0;

  initial begin
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (out_cnt < FR * W * H) begin
      @(negedge clk);
      cyc++;
      begin
        bit full;
        full = (in_cnt < N * W) || (out_cnt < N * W && in_cnt == N * W);
        in_valid  = (in_cnt < FR * W * H) && (full || $urandom_range(0, 3) != 0);
        out_ready = full || $urandom_range(0, 3) != 0;
        if (in_cnt < FR * W * H) begin
          int f, k, s, b, r, c;
          f = in_cnt / (W*H);
          k = in_cnt % (W*H);
          s = k / (N*W);
          b = (k % (N*W)) / (N*N);
          r = (k % (N*N)) / N;
          c = k % N;
          in_pix = img[f][s*N + r][b*N + c];
        end
      end
      #1;
      if (in_valid && !in_ready) n_held++;
      if (in_valid && in_ready) in_cnt++;
      if (out_valid && out_ready) begin
        int f, k;
        f = out_cnt / (W*H);
        k = out_cnt % (W*H);
        checks++;
        if (out_pix != img[f][k / W][k % W] || out_frame_end != (k == W*H - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d: %0h exp %0h fe %0b", out_cnt, out_pix, img[f][k/W][k%W], out_frame_end);
        end
        if (out_cnt == 0) first_out = cyc;
        if (out_cnt == N*W - 1) strip_end = cyc;
        out_cnt++;
      end
    end
    checks++;
    if (strip_end - first_out != N*W - 1) begin
      failures++; $display("FAIL strip drain took %0d cycles", strip_end - first_out + 1);
    end
    checks++;
    if (n_held == 0) begin failures++; $display("FAIL input never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
