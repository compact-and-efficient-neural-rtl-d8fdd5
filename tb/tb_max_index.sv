// tb_max_index: random score vectors, vectors with deliberate ties between
// two or more classes (the lowest index must win), extreme values
// (-2048 / 2047) and a winner at every position; d_out is checked one cycle
// after capture and must hold while capture is low.
module tb_max_index;
  import lst_pkg::*;

  localparam int N = 10;

  logic clk = 0;
  logic capture = 0;
  word_t scores [N];
  logic [3:0] d_out;
  int checks = 0, failures = 0, n_ties = 0;

  max_index #(.N(N)) dut (.clk, .capture, .scores, .d_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int best, bv;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        case (t % 4)
          0: scores[i] = word_t'($urandom);
          1: scores[i] = word_t'($urandom_range(0, 3));        // many ties
          2: scores[i] = (i == t % N) ? word_t'(12'sh7ff) : word_t'(12'sh800);
          default: scores[i] = word_t'(-2048 + $urandom_range(0, 2));
        endcase
      end
      best = 0; bv = int'(scores[0]);
      for (int i = 1; i < N; i++) if (int'(scores[i]) > bv) begin best = i; bv = int'(scores[i]); end
      for (int i = 0; i < N; i++) if (i != best && int'(scores[i]) == bv) begin n_ties++; break; end
      capture = 1;
      @(posedge clk); #1;
      checks++;
      if (int'(d_out) != best) begin
        failures++;
        if (failures < 10) $display("t=%0d d_out=%0d expected %0d", t, d_out, best);
      end
      @(negedge clk);
      capture = 0;
      for (int i = 0; i < N; i++) scores[i] = word_t'($urandom);
      @(posedge clk); #1;
      checks++;
      if (int'(d_out) != best) failures++;
    end
    checks++;
    if (n_ties == 0) failures++;
    $display("vectors with a tie for the maximum: %0d", n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
