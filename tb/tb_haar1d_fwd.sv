// tb_haar1d_fwd: checks the combinational forward 1-D Haar transform against
// the reference model, for the default 8-sample 3-level line and for a
// 16-sample 4-level line, with a worked example, constant lines and random
// lines of 8-bit pixels and of signed coefficients spanning at most 255.
module tb_haar1d_fwd;
  import haar_ref_pkg::*;

  int checks = 0, failures = 0;

  logic signed [8:0] x8 [8],  y8 [8];
  logic signed [8:0] x16[16], y16[16];

  haar1d_fwd #(.N(8),  .LEVELS(3), .COEF_W(9)) dut8  (.x(x8),  .y(y8));
  haar1d_fwd #(.N(16), .LEVELS(4), .COEF_W(9)) dut16 (.x(x16), .y(y16));

  task automatic check8(input line_t exp, input string what);
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (int'(y8[i]) != exp[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s y[%0d]=%0d exp %0d", what, i, y8[i], exp[i]);
      end
    end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t in, exp;
    int lo;
    // worked example: 9 7 3 5 6 10 2 6 -> 6 0 2 2 1 -1 -2 -2
    begin
      static int ex_in[8]  = '{9, 7, 3, 5, 6, 10, 2, 6};
      static int ex_out[8] = '{6, 0, 2, 2, 1, -1, -2, -2};
      for (int i = 0; i < 8; i++) begin x8[i] = 9'(ex_in[i]); exp[i] = ex_out[i]; end
      check8(exp, "example");
    end
    // odd pair sum: floor average, difference a - average
    begin
      static int ex_in[8]  = '{3, 0, 255, 0, 0, 255, 1, 2};
      for (int i = 0; i < 8; i++) begin x8[i] = 9'(ex_in[i]); in[i] = ex_in[i]; end
      exp = fwd1d(in, 8, 3);
      checks++;
      if (exp[0] != 64 || exp[4] != 2 || exp[5] != 128 || exp[6] != -127) begin
        failures++; $display("FAIL reference model sanity");
      end
      check8(exp, "odd sums");
    end
    for (int v = 0; v < 256; v += 51) begin
      for (int i = 0; i < 8; i++) begin x8[i] = 9'(v); exp[i] = (i == 0) ? v : 0; end
      check8(exp, "constant");
    end
    for (int t = 0; t < 2000; t++) begin
      lo = (t % 2 != 0) ? -127 : 0;
      for (int i = 0; i < 8; i++) begin
        in[i] = lo + int'($urandom_range(0, 255));
        x8[i] = 9'(in[i]);
      end
      exp = fwd1d(in, 8, 3);
      check8(exp, "random8");
    end
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < 16; i++) begin
        in[i] = int'($urandom_range(0, 255));
        x16[i] = 9'(in[i]);
      end
      exp = fwd1d(in, 16, 4);
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(y16[i]) != exp[i]) begin
          failures++;
          if (failures < 10) $display("FAIL random16 y[%0d]=%0d exp %0d", i, y16[i], exp[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
