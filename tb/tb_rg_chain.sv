// tb_rg_chain: loads 28 random PE results and checks that the head shows
// PE #0 in the load cycle and PE #1 .. #27 in the 27 shift cycles that
// follow; also checks that the registers hold when neither load nor shift
// is asserted, and that a new load in the middle of a run restarts it.
module tb_rg_chain;
  import lst_pkg::*;

  localparam int N = 28;

  logic clk = 0;
  logic load = 0, shift = 0;
  word_t pe_y [N];
  word_t snap [N];
  word_t head;
  int checks = 0, failures = 0;

  rg_chain #(.N(N)) dut (.clk, .load, .shift, .pe_y, .head);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input word_t exp_v, input int pos);
    checks++;
    if (head != exp_v) begin
      failures++;
      if (failures < 10) $display("position %0d: head %0d expected %0d", pos, head, exp_v);
    end
  endtask

  initial begin
    for (int r = 0; r < 50; r++) begin
      automatic int stop = (r % 5 == 4) ? 10 : N;   // every fifth run is cut short
      @(negedge clk);
      for (int i = 0; i < N; i++) begin pe_y[i] = word_t'($urandom); snap[i] = pe_y[i]; end
      load = 1; shift = 0;
      #1 chk(snap[0], 0);
      @(posedge clk);
      for (int p = 1; p < stop; p++) begin
        @(negedge clk);
        // PE outputs change after the load; the chain must not care
        for (int i = 0; i < N; i++) pe_y[i] = word_t'($urandom);
        load = 0;
        // insert an idle cycle now and then
        if ($urandom_range(0, 7) == 0) begin
          shift = 0;
          #1 chk(snap[p], p);
          @(posedge clk);
          @(negedge clk);
        end
        shift = 1;
        #1 chk(snap[p], p);
        @(posedge clk);
      end
      @(negedge clk); shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
