// tb_haar1d_inv: checks the combinational inverse 1-D Haar transform: the
// worked example comes back exactly, random coefficient lines from the
// reference forward model give the reference inverse, every even sample is
// recovered exactly and every odd one within the integer loss.
module tb_haar1d_inv;
  import haar_ref_pkg::*;

  int checks = 0, failures = 0;

  logic signed [8:0] x [8], y [8];

  haar1d_inv #(.N(8), .LEVELS(3), .COEF_W(9)) dut (.x(x), .y(y));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t pix, co, exp;
    begin
      static int ex_in[8]  = '{6, 0, 2, 2, 1, -1, -2, -2};
      static int ex_out[8] = '{9, 7, 3, 5, 6, 10, 2, 6};
      for (int i = 0; i < 8; i++) x[i] = 9'(ex_in[i]);
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(y[i]) != ex_out[i]) begin
          failures++; $display("FAIL example y[%0d]=%0d exp %0d", i, y[i], ex_out[i]);
        end
      end
    end
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 8; i++) pix[i] = int'($urandom_range(0, 255));
      co  = fwd1d(pix, 8, 3);
      exp = inv1d(co, 8, 3);
      for (int i = 0; i < 8; i++) x[i] = 9'(co[i]);
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(y[i]) != exp[i]) begin
          failures++;
          if (failures < 10) $display("FAIL random y[%0d]=%0d exp %0d", i, y[i], exp[i]);
        end
        // loss bound: at most one LSB per level
        checks++;
        if (int'(y[i]) > pix[i] || int'(y[i]) < pix[i] - 3) begin
          failures++;
          if (failures < 10) $display("FAIL bound y[%0d]=%0d pix %0d", i, y[i], pix[i]);
        end
      end
      checks++;
      if (int'(y[0]) != pix[0]) begin
        failures++; $display("FAIL first sample not exact");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
