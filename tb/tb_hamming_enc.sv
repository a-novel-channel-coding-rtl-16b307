// tb_hamming_enc: checks the Hamming encoder for the default 9-bit data word
// (13-bit codeword) and for the 7-bit example, (11,7) code: codeword length,
// every data word exhaustively against the reference encoder, a zero
// syndrome for every codeword, and one worked (11,7) codeword.
module tb_hamming_enc;
  import haar_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [8:0]  d9;
  logic [12:0] c9;
  logic [6:0]  d7;
  logic [10:0] c7;

  hamming_enc #(.K(9)) dut9 (.data(d9), .code(c9));
  hamming_enc #(.K(7)) dut7 (.data(d7), .code(c7));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks += 2;
    if ($bits(c9) != 13 || ham_r(9) != 4) failures++;
    if ($bits(c7) != 11 || ham_r(7) != 4) failures++;   // paper: k = 7 -> r = 4
    for (int v = 0; v < 512; v++) begin
      d9 = 9'(v);
      #1;
      checks++;
      if (longint'(c9) != ham_enc(9, longint'(v))) begin
        failures++;
        if (failures < 10) $display("FAIL k=9 data %0h code %0h exp %0h", v, c9, ham_enc(9, longint'(v)));
      end
      checks++;
      if (ham_syn(9, longint'(c9)) != 0) failures++;
    end
    for (int v = 0; v < 128; v++) begin
      d7 = 7'(v);
      #1;
      checks++;
      if (longint'(c7) != ham_enc(7, longint'(v))) begin
        failures++;
        if (failures < 10) $display("FAIL k=7 data %0h code %0h exp %0h", v, c7, ham_enc(7, longint'(v)));
      end
    end
    // worked example, data 1011001 (bit 6..0) at positions 11,10,9,7,6,5,3:
    // pos 3=1,5=0,6=0,7=1,9=1,10=0,11=1
    // p1 = 3^5^7^9^11 = 1^0^1^1^1 = 0; p2 = 3^6^7^10^11 = 1^0^1^0^1 = 1
    // p4 = 5^6^7 = 0^0^1 = 1;          p8 = 9^10^11 = 1^0^1 = 0
    // codeword positions 11..1 = 1 0 1 0 1 0 0 1 1 1 0
    d7 = 7'b1011001;
    #1;
    checks++;
    if (c7 != 11'b10101001110) begin
      failures++; $display("FAIL worked example code %b", c7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
