// tb_pit_system_full: one complete frame through the link with every
// parameter at its default: a 256x256 synthetic image (a bright textured
// disc on a dark ground, in the spirit of a CT slice) cut into 1024 subblocks
// of 8x8. The testbench acts as the channel and flips one bit in about 40%
// of the codewords (data and parity bits both); all of them must be
// corrected, so the output must equal the reference reconstruction and stay
// within 16 grey levels of the original. Transmitted codewords, receiver
// flags, error counters and the handshake mechanisms are checked as in
// tb_pit_system.
module tb_pit_system_full;
  import haar_ref_pkg::*;

  localparam int W = 256, H = 256, N = 8, FR = 1;
  localparam int NC = 13;
  localparam bit SMOOTH = 1;       // 1: synthetic disc image instead of noise
  localparam bit SINGLE_ONLY = 1;  // 1: channel flips at most one bit per word
  localparam int WATCHDOG = 20000000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic pix_in_valid = 0, pix_in_ready;
  logic [7:0] pix_in = 0;
  logic tx_valid, tx_ready = 0, tx_last;
  logic [NC-1:0] tx_code;
  logic rx_valid = 0, rx_ready;
  logic [NC-1:0] rx_code = 0;
  logic pix_out_valid, pix_out_ready = 0, pix_out_frame_end;
  logic [7:0] pix_out;
  logic rx_corrected, rx_uncorrectable;
  logic [3:0] rx_syndrome;
  logic [31:0] corrected_count, uncorrectable_count;

  pit_system dut (.*);   // default parameters: 256x256 image, 8x8 blocks

  always #5 clk = ~clk;

  int cyc = 0;
  initial begin
    while (cyc < WATCHDOG) @(negedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  int n_clean = 0, n_data1 = 0, n_par1 = 0, n_double = 0, n_unc = 0;
  int n_in_hold = 0, n_tx_stall = 0, n_rx_wait = 0, n_out_stall = 0;
  int n_blocks = 0, n_frames = 0, exp_corr = 0, exp_unc = 0;
  int max_err = 0;

  int    img  [FR][H][W];
  int    rec  [FR][H][W];
  blk_t  orig_blk, co_blk, rx_blk;
  longint q_code [$];
  int    q_syn  [$];
  int    in_cnt = 0, tx_cnt = 0, rx_cnt = 0, out_cnt = 0;
  int    total;

  // block geometry of the k-th coefficient/pixel of a frame in block order
  function automatic void blk_pos(input int k, output int y, output int x, output int r, output int c);
    int s, b;
    s = k / (N*W);
    b = (k % (N*W)) / (N*N);
    r = (k % (N*N)) / N;
    c = k % N;
    y = s*N + r;
    x = b*N + c;
  endfunction

  function automatic int sx9(input longint v);
    return ((v & 'h100) != 0) ? int'(v & 'h1ff) - 512 : int'(v & 'h1ff);
  endfunction

  initial begin
    total = FR * W * H;
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          if (SMOOTH) begin
            int dx, dy;
            dx = x - W/2; dy = y - H/2;
            img[f][y][x] = (dx*dx + dy*dy < (W*W)/5) ? 60 + (x*y + 13*f) % 150 : 10;
          end else
            img[f][y][x] = int'($urandom_range(0, 255));
        end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (out_cnt < total) begin
      @(negedge clk);
      cyc++;
      // ---- drive ----
      pix_in_valid = (in_cnt < total) && ($urandom_range(0, 9) < 8);
      if (in_cnt < total) pix_in = 8'(img[in_cnt / (W*H)][(in_cnt / W) % H][in_cnt % W]);
      tx_ready      = $urandom_range(0, 9) < 8;
      rx_valid      = (q_code.size() > 0) && ($urandom_range(0, 9) < 8);
      rx_code       = (q_code.size() > 0) ? NC'(q_code[0]) : '0;
      pix_out_ready = $urandom_range(0, 9) < 8;
      #1;
      // ---- observe the transfers of the coming clock edge ----
      if (pix_in_valid && !pix_in_ready) n_in_hold++;
      if (pix_in_valid && pix_in_ready) in_cnt++;

      if (tx_valid && !tx_ready) n_tx_stall++;
      if (tx_valid && tx_ready) begin
        int f, k, y, x, r, c, kind;
        longint cw, bad;
        f = tx_cnt / (W*H);
        k = tx_cnt % (W*H);
        blk_pos(k, y, x, r, c);
        if (r == 0 && c == 0) begin
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++) orig_blk[i][j] = img[f][y + i][x + j];
          co_blk = fwd2d(orig_blk, N, 3);
        end
        cw = ham_enc(9, longint'(co_blk[r][c]) & 'h1ff);
        checks++;
        if (longint'(tx_code) != cw || tx_last != (r == N-1 && c == N-1)) begin
          failures++;
          if (failures < 10) $display("FAIL tx %0d: %0h exp %0h", tx_cnt, tx_code, cw);
        end
        if (tx_last) n_blocks++;
        // channel
        bad = longint'(tx_code);
        kind = $urandom_range(0, SINGLE_ONLY ? 86 : 99);
        if (kind < 60) begin
          n_clean++;
        end else if (kind < 75) begin            // one data bit
          int p;
          do p = $urandom_range(1, NC); while ((p & (p - 1)) == 0);
          bad ^= 64'(1) << (p - 1);
          n_data1++;
        end else if (kind < 87) begin            // one parity bit
          int p;
          p = 1 << $urandom_range(0, 3);
          bad ^= 64'(1) << (p - 1);
          n_par1++;
        end else if (kind < 95) begin            // two bits, syndrome inside the word
          int p, q;
          do begin p = $urandom_range(1, NC); q = $urandom_range(1, NC); end
          while (p == q || (p ^ q) > NC);
          bad ^= (64'(1) << (p - 1)) ^ (64'(1) << (q - 1));
          n_double++;
        end else begin                           // two bits, syndrome 14 or 15
          int p;
          p = ($urandom_range(0, 1) == 0) ? 6 : 7;
          bad ^= (64'(1) << (p - 1)) ^ (64'(1) << 7);
        end
        q_code.push_back(bad);
        q_syn.push_back(ham_syn(9, bad));
        tx_cnt++;
      end

      if (rx_valid && !rx_ready) n_rx_wait++;
      if (rx_valid && rx_ready) begin
        int f, k, y, x, r, c, s;
        longint bad;
        bad = q_code.pop_front();
        s = q_syn.pop_front();
        f = rx_cnt / (W*H);
        k = rx_cnt % (W*H);
        blk_pos(k, y, x, r, c);
        rx_blk[r][c] = sx9(ham_dec(9, bad));
        checks++;
        if (rx_corrected != (s != 0 && s <= NC) || rx_uncorrectable != (s > NC) || int'(rx_syndrome) != s) begin
          failures++;
          if (failures < 10) $display("FAIL rx flags %0d: syn %0d exp %0d", rx_cnt, rx_syndrome, s);
        end
        if (s != 0 && s <= NC) exp_corr++;
        if (s > NC) begin exp_unc++; n_unc++; end
        if (r == N-1 && c == N-1) begin
          blk_t pb;
          pb = inv2d(rx_blk, N, 3, 255);
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++) rec[f][y - (N-1) + i][x - (N-1) + j] = pb[i][j];
        end
        rx_cnt++;
      end

      if (pix_out_valid && !pix_out_ready) n_out_stall++;
      if (pix_out_valid && pix_out_ready) begin
        int f, k;
        f = out_cnt / (W*H);
        k = out_cnt % (W*H);
        checks++;
        if (int'(pix_out) != rec[f][k / W][k % W] || pix_out_frame_end != (k == W*H - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d: %0d exp %0d", out_cnt, pix_out, rec[f][k/W][k%W]);
        end
        if (SINGLE_ONLY) begin
          // every error was corrected: only the transform's own loss is left
          int e;
          e = int'(pix_out) - img[f][k / W][k % W];
          if (e < 0) e = -e;
          if (e > max_err) max_err = e;
        end
        if (pix_out_frame_end) n_frames++;
        out_cnt++;
      end
    end
    @(negedge clk);
    checks += 2;
    if (corrected_count != 32'(exp_corr)) begin failures++; $display("FAIL corrected_count %0d exp %0d", corrected_count, exp_corr); end
    if (uncorrectable_count != 32'(exp_unc)) begin failures++; $display("FAIL uncorrectable_count %0d exp %0d", uncorrectable_count, exp_unc); end
    $display("events: clean=%0d data1=%0d par1=%0d double=%0d uncorrectable=%0d in_hold=%0d tx_stall=%0d rx_wait=%0d out_stall=%0d blocks=%0d frames=%0d cycles=%0d",
             n_clean, n_data1, n_par1, n_double, n_unc, n_in_hold, n_tx_stall, n_rx_wait, n_out_stall, n_blocks, n_frames, cyc);
    begin
      int ev [11];
      ev = '{n_clean, n_data1, n_par1, n_double, n_unc, n_in_hold, n_tx_stall, n_rx_wait, n_out_stall, n_blocks, n_frames};
      foreach (ev[i]) begin
        checks++;
        if (ev[i] == 0 && !(SINGLE_ONLY && (i == 3 || i == 4))) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    if (SINGLE_ONLY) begin
      checks++;
      $display("largest pixel error after decoding: %0d", max_err);
      if (max_err > 16) begin failures++; $display("FAIL pixel error %0d", max_err); end
    end
    checks++;
    if (n_blocks != FR * (W/N) * (H/N) || n_frames != FR) begin
      failures++; $display("FAIL block/frame count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
