// tb_haar2d_fwd: drives random 8x8 pixel blocks into the forward 2-D Haar
// unit and checks every coefficient, in raster order, against the reference
// model, plus out_last on the 64th. The first blocks run at full rate, where
// the latency (2N+1 cycles from presenting the last pixel to the first
// coefficient) and the block period (2N*N + 2N cycles) are checked; later
// blocks have random input gaps and output stalls.
module tb_haar2d_fwd;
  import haar_ref_pkg::*;

  localparam int N = 8;
  localparam int NBLK = 40;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [7:0] in_pix = 0;
  logic signed [8:0] out_coef;

  haar2d_fwd dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  blk_t pix [NBLK], co [NBLK];
  int in_cnt = 0, out_cnt = 0, cyc = 0;
  int last_in_cyc = -1, first_out_cyc [NBLK], blk_start [NBLK];
  bit seen_first [NBLK];
  bit stall_seen = 0;

  initial begin
    for (int b = 0; b < NBLK; b++) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          pix[b][r][c] = (b == 0) ? 100 : (b == 1) ? ((r + c) % 2) * 255 : int'($urandom_range(0, 255));
      co[b] = fwd2d(pix[b], N, 3);
      seen_first[b] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (out_cnt < NBLK * N * N) begin
      @(negedge clk);
      cyc++;
      begin
        bit full_rate;
        full_rate = (in_cnt < 3 * N * N) && (out_cnt < 3 * N * N);
        in_valid  = (in_cnt < NBLK * N * N) && (full_rate || ($urandom_range(0, 9) < 7));
        out_ready = full_rate || ($urandom_range(0, 9) < 6);
        if (in_cnt < NBLK * N * N) in_pix = 8'(pix[in_cnt / (N*N)][(in_cnt / N) % N][in_cnt % N]);
      end
      #1;
      if (in_valid && in_ready) begin
        if (in_cnt % (N*N) == 0) blk_start[in_cnt / (N*N)] = cyc;
        if (in_cnt % (N*N) == N*N - 1) last_in_cyc = cyc;
        in_cnt++;
      end
      if (out_valid && !out_ready) stall_seen = 1;
      if (out_valid) begin
        int b, r, c;
        b = out_cnt / (N*N); r = (out_cnt / N) % N; c = out_cnt % N;
        if (!seen_first[b]) begin
          seen_first[b] = 1;
          first_out_cyc[b] = cyc;
          if (b < 3) begin
            checks++;
            if (cyc - last_in_cyc != 2*N + 1) begin
              failures++; $display("FAIL latency block %0d: %0d cycles", b, cyc - last_in_cyc);
            end
          end
        end
        if (out_ready) begin
          checks++;
          if (int'(out_coef) != co[b][r][c] || out_last != (r == N-1 && c == N-1)) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d (%0d,%0d): %0d exp %0d last %0b", b, r, c, out_coef, co[b][r][c], out_last);
          end
          out_cnt++;
        end
      end
    end
    // full-rate block period: start of block 1 to start of block 2
    checks++;
    if (blk_start[2] - blk_start[1] != 2*N*N + 2*N) begin
      failures++; $display("FAIL block period %0d", blk_start[2] - blk_start[1]);
    end
    checks++;
    if (!stall_seen) begin failures++; $display("FAIL no output stall exercised"); end
    // constant block: DC only
    checks++;
    if (co[0][0][0] != 100 || co[0][3][5] != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
