// tb_control_unit: runs the control unit together with the counters block
// through two complete classifications, the first image fed with random
// gaps in new_data, the second started from the done state, and checks
// the schedule it produces:
//   * 784 load writes, then 784 row write-backs in address order
//     0, 1, ..., 783 and 784 column write-backs in order 28w + k;
//   * every dot product has 29 (row/column) or 785 (output) MAC steps, the
//     first with mac_clr, the last with bias_sel, none of them overlapping a
//     write-back; the mode matches the stage;
//   * each write-back run starts with one chain load followed by 27 shifts;
//   * one max capture, then data_ready exactly 4035 cycles after the last
//     pixel; data_ready holds until the next new_data.
module tb_control_unit;
  import lst_pkg::*;

  localparam int D = 28;
  localparam int LAT = 2 * D * (2 * D + 2) + D * D + 3;

  logic clk = 0, reset = 1, new_data = 0;
  state_t phase;
  mode_t  mode;
  logic clr_j, inc_j, clr_w, inc_w, clr_k, inc_k;
  logic j_last, j_bias, w_last, k_last;
  logic mac_en, mac_clr, bias_sel, ram_we, din_sel, chain_load, chain_shift, max_capture, data_ready;
  logic [4:0] cnt_r, cnt_c;
  logic [9:0] cnt_o;
  int checks = 0, failures = 0;

  control_unit dut (.clk, .reset, .new_data, .j_last, .j_bias, .w_last, .k_last,
    .phase, .clr_j, .inc_j, .clr_w, .inc_w, .clr_k, .inc_k, .mode, .mac_en, .mac_clr,
    .bias_sel, .ram_we, .din_sel, .chain_load, .chain_shift, .max_capture, .data_ready);
  counters_block #(.D(D)) u_cnt (.clk, .reset, .phase, .clr_j, .inc_j, .clr_w, .inc_w,
    .clr_k, .inc_k, .cnt_r, .cnt_c, .cnt_o, .j_last, .j_bias, .w_last, .k_last);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("%0t: %s", $time, what);
    end
  endtask

  // ---- monitor -----------------------------------------------------------
  int n_load_wr, n_row_wr, n_col_wr, n_loads, n_shifts, n_capture;
  int run_len, run_cnt [3];   // MAC steps in the current dot product
  int shift_run;
  logic in_run;
  logic prev_bias;
  mode_t run_mode;

  always @(posedge clk) if (!reset) begin
    if (ram_we && !din_sel) n_load_wr++;
    if (ram_we && din_sel && phase == ST_ROW_WR) begin
      chk(int'(cnt_o) == n_row_wr, "row write-back order");
      n_row_wr++;
    end
    if (ram_we && din_sel && phase == ST_COL_WR) begin
      chk(int'(cnt_o) == D * (n_col_wr % D) + n_col_wr / D, "column write-back order");
      n_col_wr++;
    end
    if (mac_en) begin
      chk(!(ram_we && din_sel), "MAC step during write-back");
      if (mac_clr) begin
        chk(!in_run || prev_bias, "dot product restarted before its bias");
        in_run = 1; run_len = 0; run_mode = mode;
      end
      chk(in_run, "MAC step outside a dot product");
      chk(mode == run_mode, "mode changed in a dot product");
      run_len++;
      prev_bias = bias_sel;
      if (bias_sel) begin
        chk(run_len == ((mode == MODE_OUT) ? D * D + 1 : D + 1), "dot product length");
        run_cnt[int'(mode)]++;
        in_run = 0;
      end
    end else
      chk(!bias_sel && !mac_clr, "bias/clear without MAC step");
    if (chain_load) begin
      n_loads++;
      chk(shift_run == 0 || shift_run == D - 1, "shift run length");
      shift_run = 0;
      chk(phase == ST_ROW_WR || phase == ST_COL_WR, "chain load outside write-back");
    end
    if (chain_shift) begin n_shifts++; shift_run++; end
    if (max_capture) begin
      n_capture++;
      chk(mode == MODE_OUT, "capture mode");
    end
  end

  task automatic clear_counts();
    n_load_wr = 0; n_row_wr = 0; n_col_wr = 0; n_loads = 0; n_shifts = 0; n_capture = 0;
    run_cnt = '{0, 0, 0}; in_run = 0; shift_run = 0; prev_bias = 0;
  endtask

  task automatic one_image(input int first_given, input int gaps);
    int t0, t1;
    // first_given: the first pixel was already taken from the done state
    for (int p = first_given; p < D * D; p++) begin
      if (gaps && $urandom_range(0, 3) == 0) begin
        @(negedge clk) new_data = 0;
        @(posedge clk);
      end
      @(negedge clk) new_data = 1;
      @(posedge clk);
    end
    t0 = $time / 10;
    @(negedge clk) new_data = 0;
    while (!data_ready) begin @(posedge clk); #1; end
    t1 = $time / 10;
    chk(t1 - t0 == LAT, $sformatf("latency %0d expected %0d", t1 - t0, LAT));
    repeat (20) @(posedge clk);
    #1 chk(data_ready, "data_ready held");
    chk(n_load_wr == D * D, $sformatf("load writes %0d", n_load_wr));
    chk(n_row_wr == D * D, $sformatf("row write-backs %0d", n_row_wr));
    chk(n_col_wr == D * D, $sformatf("column write-backs %0d", n_col_wr));
    chk(run_cnt[0] == D && run_cnt[1] == D && run_cnt[2] == 1, "dot product count");
    chk(n_loads == 2 * D && n_shifts == 2 * D * (D - 1), "chain loads/shifts");
    chk(n_capture == 1, "one capture");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    #1 chk(!data_ready, "data_ready low after reset");
    clear_counts();
    one_image(0, 1);
    // second image: the first new_data in the done state is pixel 0
    clear_counts();
    @(negedge clk) new_data = 1;
    @(posedge clk);
    #1 chk(!data_ready, "data_ready drops on new_data");
    one_image(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
