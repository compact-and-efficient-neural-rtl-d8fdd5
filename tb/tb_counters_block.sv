// tb_counters_block: walks the counters through every phase of the
// schedule as the control unit would and checks the three bus addresses and
// the status flags at every step against the address formulas:
//   load j;  row read 28k+j;  row write 28k+w;  column read 28j+k;
//   column write 28w+k;  output stage j;  cnt_r / cnt_c = j in their stage.
// Also checks that clear wins over step and that reset clears all counters.
module tb_counters_block;
  import lst_pkg::*;

  localparam int D = 28;

  logic clk = 0, reset = 1;
  state_t phase = ST_LOAD;
  logic clr_j = 0, inc_j = 0, clr_w = 0, inc_w = 0, clr_k = 0, inc_k = 0;
  logic [4:0] cnt_r, cnt_c;
  logic [9:0] cnt_o;
  logic j_last, j_bias, w_last, k_last;
  int checks = 0, failures = 0;

  counters_block #(.D(D)) dut (.clk, .reset, .phase, .clr_j, .inc_j, .clr_w, .inc_w,
    .clr_k, .inc_k, .cnt_r, .cnt_c, .cnt_o, .j_last, .j_bias, .w_last, .k_last);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  task automatic step(input logic ij, cj, iw, cw, ik, ck);
    @(negedge clk);
    inc_j = ij; clr_j = cj; inc_w = iw; clr_w = cw; inc_k = ik; clr_k = ck;
    @(posedge clk);
    @(negedge clk);
    {inc_j, clr_j, inc_w, clr_w, inc_k, clr_k} = '0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    // load: j = 0..783
    phase = ST_LOAD;
    for (int j = 0; j < D * D; j++) begin
      #1 chk(cnt_o, j, "load addr");
      chk(j_last, j == D * D - 1, "load j_last");
      step(1, 0, 0, 0, 0, 0);
    end
    step(0, 1, 0, 0, 0, 1);
    for (int k = 0; k < D; k++) begin
      for (int st = 0; st < 2; st++) begin
        phase = st ? ST_COL_MAC : ST_ROW_MAC;
        for (int j = 0; j <= D; j++) begin
          #1;
          if (j < D) chk(cnt_o, st ? D * j + k : D * k + j, "mac addr");
          chk(st ? cnt_c : cnt_r, j, "rom addr");
          chk(st ? cnt_r : cnt_c, 0, "other rom addr");
          chk(j_last, j == D, "mac j_last");
          chk(j_bias, j == D, "mac j_bias");
          chk(k_last, k == D - 1, "k_last");
          step(j < D, j == D, 0, 0, 0, 0);
        end
        phase = st ? ST_COL_WR : ST_ROW_WR;
        for (int w = 0; w < D; w++) begin
          #1 chk(cnt_o, st ? D * w + k : D * k + w, "write addr");
          chk(w_last, w == D - 1, "w_last");
          chk(j_last, 0, "j_last in write");
          // clear must win over a simultaneous step
          step(0, 0, 1, w == D - 1, 0, 0);
        end
      end
      step(0, 0, 0, 0, 1, 0);
    end
    // after 28 steps k wrapped to 28; clear it, then the output stage
    step(0, 0, 0, 0, 0, 1);
    phase = ST_OUT_MAC;
    for (int j = 0; j <= D * D; j++) begin
      #1 chk(cnt_o, j, "out addr");
      chk(j_last, j == D * D, "out j_last");
      chk(j_bias, j == D * D, "out j_bias");
      step(1, 0, 0, 0, 0, 0);
    end
    // reset clears everything
    @(negedge clk) reset = 1;
    @(posedge clk);
    @(negedge clk) reset = 0;
    #1 chk(cnt_o, 0, "after reset");
    phase = ST_ROW_WR;
    #1 chk(cnt_o, 0, "after reset w,k");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
