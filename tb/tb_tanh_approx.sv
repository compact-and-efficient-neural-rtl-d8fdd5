// tb_tanh_approx: exhaustive check of the tanh approximation over all 4096
// Q5.7 inputs.  The expected value is computed with plain integer
// arithmetic (sign(x) beyond |x| = 2, x -/+ floor(x*x/512) inside) and, as a
// second, looser reference, compared with the real-valued formula
// (1 -/+ x/4) x within one LSB.  Counts how many inputs fall in each of the
// four regions of the function.
module tb_tanh_approx;
  import lst_pkg::*;

  word_t x, y;
  int checks = 0, failures = 0;
  int n_sat_pos = 0, n_sat_neg = 0, n_quad_pos = 0, n_quad_neg = 0;

  tanh_approx dut (.x, .y);

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -2048; v < 2048; v++) begin
      int exp_y;
      real xr, fr;
      x = word_t'(v);
      #1;
      if (v > 256)       begin exp_y =  128; n_sat_pos++;  end
      else if (v < -256) begin exp_y = -128; n_sat_neg++;  end
      else if (v >= 0)   begin exp_y = v - (v * v) / 512; n_quad_pos++; end
      else               begin exp_y = v + (v * v) / 512; n_quad_neg++; end
      checks++;
      if (int'(y) != exp_y) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d expected %0d", v, y, exp_y);
      end
      // real-valued formula, one LSB tolerance
      xr = v / 128.0;
      if (xr > 2.0)       fr = 1.0;
      else if (xr < -2.0) fr = -1.0;
      else if (xr < 0.0)  fr = (1.0 + xr / 4.0) * xr;
      else                fr = (1.0 - xr / 4.0) * xr;
      checks++;
      if ((fr * 128.0 - real'(y)) > 1.0 || (real'(y) - fr * 128.0) > 1.0) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d far from %f", v, y, fr * 128.0);
      end
    end
    if (n_sat_pos == 0 || n_sat_neg == 0 || n_quad_pos == 0 || n_quad_neg == 0) failures++;
    $display("regions: sat+ %0d sat- %0d quad+ %0d quad- %0d",
             n_sat_pos, n_sat_neg, n_quad_pos, n_quad_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
