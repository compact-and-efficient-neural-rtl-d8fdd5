// tb_weight_rom: reads every word of a 29-word row/column ROM and of a
// 785-word output-layer ROM in random order and checks the value and its
// one-cycle read latency against the content formula lst_pkg::init_weight.
// Also checks that the contents stay in [-32, 31] (+-0.25), are not all
// alike, and that addresses past the end read 0.
module tb_weight_rom;
  import lst_pkg::*;

  logic clk = 0;
  logic [4:0] a_s = '0;
  logic [9:0] a_l = '0;
  word_t q_s, q_l;
  int checks = 0, failures = 0;

  weight_rom #(.DEPTH(29),  .LAYER(LAYER_COL), .ROW(5)) dut_s (.clk, .addr(a_s), .q(q_s));
  weight_rom #(.DEPTH(785), .LAYER(LAYER_OUT), .ROW(7)) dut_l (.clk, .addr(a_l), .q(q_l));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int exp_v, input string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  int distinct [int];

  initial begin
    for (int n = 0; n < 3000; n++) begin
      automatic int s = $urandom_range(0, 31);
      automatic int l = $urandom_range(0, 1023);
      @(negedge clk);
      a_s = 5'(s);
      a_l = 10'(l);
      @(posedge clk); #1;
      chk(int'(q_s), s < 29  ? int'(init_weight(LAYER_COL, 5, s)) : 0, "short");
      chk(int'(q_l), l < 785 ? int'(init_weight(LAYER_OUT, 7, l)) : 0, "long");
      if (l < 785) begin
        checks++;
        if (int'(q_l) < -32 || int'(q_l) > 31) failures++;
        distinct[int'(q_l)] = 1;
      end
      // latency: the value must not change before the next edge
      @(negedge clk);
      a_s = 5'($urandom); a_l = 10'($urandom);
      #1;
      chk(int'(q_s), s < 29 ? int'(init_weight(LAYER_COL, 5, s)) : 0, "hold");
    end
    checks++;
    if (distinct.num() < 32) begin
      failures++;
      $display("only %0d distinct weights", distinct.num());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
