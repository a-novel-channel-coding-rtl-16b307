// tb_hamming_dec: checks the Hamming decoder for 9-bit and 7-bit data. For
// every data word: the clean codeword decodes with syndrome 0 and no flag;
// each single bit flip is found (syndrome = flipped position), flagged as
// corrected and repaired. Every double flip gives a non-zero syndrome, and
// those pointing past the codeword are flagged uncorrectable.
module tb_hamming_dec;
  import haar_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [12:0] c9;
  logic [8:0]  d9;
  logic [3:0]  s9;
  logic        corr9, unc9;
  logic [10:0] c7;
  logic [6:0]  d7;
  logic [3:0]  s7;
  logic        corr7, unc7;

  hamming_dec #(.K(9)) dut9 (.code(c9), .data(d9), .syndrome(s9), .corrected(corr9), .uncorrectable(unc9));
  hamming_dec #(.K(7)) dut7 (.code(c7), .data(d7), .syndrome(s7), .corrected(corr7), .uncorrectable(unc7));

  int n_unc = 0;

  initial begin
    #10000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint cw;
    for (int v = 0; v < 512; v++) begin
      cw = ham_enc(9, longint'(v));
      c9 = 13'(cw);
      #1;
      checks++;
      if (d9 != 9'(v) || s9 != 0 || corr9 || unc9) begin
        failures++;
        if (failures < 10) $display("FAIL clean %0h -> %0h s=%0d", v, d9, s9);
      end
      for (int p = 1; p <= 13; p++) begin
        c9 = 13'(cw) ^ (13'(1) << (p - 1));
        #1;
        checks++;
        if (d9 != 9'(v) || int'(s9) != p || !corr9 || unc9) begin
          failures++;
          if (failures < 10) $display("FAIL flip %0d of %0h -> %0h s=%0d", p, v, d9, s9);
        end
        for (int q = p + 1; q <= 13; q++) begin
          c9 = 13'(cw) ^ (13'(1) << (p - 1)) ^ (13'(1) << (q - 1));
          #1;
          checks++;
          if (int'(s9) != (p ^ q) || (corr9 == unc9) || (unc9 != ((p ^ q) > 13))) begin
            failures++;
            if (failures < 10) $display("FAIL double %0d,%0d s=%0d", p, q, s9);
          end
          if (unc9) n_unc++;
        end
      end
    end
    for (int v = 0; v < 128; v++) begin
      cw = ham_enc(7, longint'(v));
      for (int p = 0; p <= 11; p++) begin
        c7 = 11'(cw) ^ ((p == 0) ? 11'(0) : (11'(1) << (p - 1)));
        #1;
        checks++;
        if (d7 != 7'(v) || int'(s7) != p || corr7 != (p != 0) || unc7) begin
          failures++;
          if (failures < 10) $display("FAIL k=7 flip %0d of %0h -> %0h", p, v, d7);
        end
      end
    end
    checks++;
    if (n_unc == 0) begin
      failures++; $display("FAIL no uncorrectable syndrome seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
