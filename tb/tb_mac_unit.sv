// tb_mac_unit: random dot products of length 1..785 through the MAC core,
// including idle (en = 0) cycles in the middle, back-to-back starts with
// clr, and operands large enough to drive the result into both saturation
// limits.  The expected result is a 64-bit integer sum, shifted right by 7
// (floor) and clamped to [-2048, 2047]; y is checked after every step.
module tb_mac_unit;
  import lst_pkg::*;

  logic  clk = 0;
  logic  en = 0, clr = 0;
  word_t data = '0, weight = '0;
  word_t y;
  int checks = 0, failures = 0;
  int n_sat_hi = 0, n_sat_lo = 0;

  mac_unit dut (.clk, .en, .clr, .data, .weight, .y);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_y(longint acc);
    longint s = acc >>> 7;
    if (s > 2047) return 2047;
    if (s < -2048) return -2048;
    return int'(s);
  endfunction

  initial begin
    longint acc;
    int len, big;
    for (int t = 0; t < 60; t++) begin
      len = (t % 3 == 0) ? 785 : 1 + $urandom_range(0, 60);
      big = (t % 4 == 1) ? 1 : 0;
      acc = 0;
      for (int n = 0; n < len; n++) begin
        // occasionally stall one cycle with en low: result must not move
        if ($urandom_range(0, 9) == 0) begin
          @(negedge clk);
          en = 0; data = word_t'($urandom); weight = word_t'($urandom);
          @(posedge clk); #1;
          if (n > 0) begin
            checks++;
            if (int'(y) != expect_y(acc)) failures++;
          end
        end
        @(negedge clk);
        en  = 1;
        clr = (n == 0);
        if (big) begin
          data   = word_t'(t[2] ? 2047 - $urandom_range(0, 15) : -2048 + $urandom_range(0, 15));
          weight = word_t'(t[1] ? 2047 - $urandom_range(0, 15) : 2047 - $urandom_range(0, 15));
        end else begin
          data   = word_t'($urandom_range(0, 4095));
          weight = word_t'($signed(6'($urandom)));
        end
        acc = (n == 0 ? 0 : acc) + longint'(data) * longint'(weight);
        @(posedge clk); #1;
        checks++;
        if (int'(y) != expect_y(acc)) begin
          failures++;
          if (failures < 10) $display("t=%0d n=%0d y=%0d expected %0d", t, n, y, expect_y(acc));
        end
      end
      if (int'(y) == 2047) n_sat_hi++;
      if (int'(y) == -2048) n_sat_lo++;
      @(negedge clk); en = 0; clr = 0;
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("saturation not reached: hi %0d lo %0d", n_sat_hi, n_sat_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
