// tb_lst1_top: end-to-end test of the LST-1 classifier at its full size
// (28x28 image, 28 PEs, 10 classes; no parameter overrides).
//
// Four images are classified back to back: random pixels in [0, 1] fed
// with random gaps in new_data; a synthetic ring-shaped "digit"; an image
// of large pixel values (+-16) that drives the PE results into saturation;
// and an all-zero image that leaves only the biases.  The second and later
// images start from the done state.  For each one a bit-exact reference
// model written here (integer sums of the ROM contents, shift and clamp to
// Q5.7, integer tanh approximation) gives the FC1 result, the FC2 result,
// the ten class scores and the digit; the test compares the RAM contents
// after the row stage and after the column stage, the ten PE scores, D_out,
// and the latency of 4035 cycles from the last pixel to data_ready.
//
// It also counts how often each mechanism of the design happened and fails
// if one never did: tanh in each of its four regions, PE saturation, bias
// steps, the rc PEs holding during the output stage, gaps in the image
// load, and restarting from the done state.
module tb_lst1_top;
  import lst_pkg::*;

  localparam int D   = 28;
  localparam int NF  = D * D;
  localparam int NC  = 10;
  localparam int LAT = 2 * D * (2 * D + 2) + NF + 3;

  logic clk = 0, reset = 1, new_data = 0;
  word_t d_in = '0;
  logic data_ready;
  logic [3:0] d_out;
  int checks = 0, failures = 0;

  lst1_top dut (.clk, .reset, .new_data, .d_in, .data_ready, .d_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model ---------------------------------------------------
  function automatic int clamp12(longint acc);
    longint s = acc >>> FRAC_W;
    return s > 2047 ? 2047 : s < -2048 ? -2048 : int'(s);
  endfunction

  function automatic int f_tanh(int v);
    if (v > 256)  return 128;
    if (v < -256) return -128;
    return v >= 0 ? v - (v * v) / 512 : v + (v * v) / 512;
  endfunction

  int img [NF], ref_v [NF], ref_y [NF], ref_s [NC], ref_digit;

  task automatic reference();
    longint acc;
    for (int k = 0; k < D; k++)
      for (int i = 0; i < D; i++) begin
        acc = longint'(init_weight(LAYER_ROW, i, D)) * 128;
        for (int j = 0; j < D; j++) acc += longint'(init_weight(LAYER_ROW, i, j)) * img[D*k + j];
        ref_v[D*k + i] = f_tanh(clamp12(acc));
      end
    for (int k = 0; k < D; k++)
      for (int i = 0; i < D; i++) begin
        acc = longint'(init_weight(LAYER_COL, i, D)) * 128;
        for (int j = 0; j < D; j++) acc += longint'(init_weight(LAYER_COL, i, j)) * ref_v[D*j + k];
        ref_y[D*i + k] = f_tanh(clamp12(acc));
      end
    ref_digit = 0;
    for (int c = 0; c < NC; c++) begin
      acc = longint'(init_weight(LAYER_OUT, c, NF)) * 128;
      for (int a = 0; a < NF; a++) acc += longint'(init_weight(LAYER_OUT, c, a)) * ref_y[a];
      ref_s[c] = clamp12(acc);
      if (ref_s[c] > ref_s[ref_digit]) ref_digit = c;
    end
  endtask

  // ---- mechanism counters ------------------------------------------------
  int n_sat_pos, n_sat_neg, n_quad_pos, n_quad_neg, n_pe_sat, n_bias, n_rc_hold,
      n_gap, n_restart;

  always @(posedge clk) if (!reset) begin
    if (dut.ram_we && dut.din_sel) begin
      if (int'(dut.head) > 256)       n_sat_pos++;
      else if (int'(dut.head) < -256) n_sat_neg++;
      else if (int'(dut.head) > 0)    n_quad_pos++;
      else if (int'(dut.head) < 0)    n_quad_neg++;
    end
    if (dut.chain_load)
      for (int i = 0; i < D; i++)
        if (int'(dut.pe_y[i]) == 2047 || int'(dut.pe_y[i]) == -2048) n_pe_sat++;
    if (dut.bias_sel) n_bias++;
    if (dut.mac_en && dut.mode == MODE_OUT) n_rc_hold++;
    if (dut.phase == ST_LOAD && !new_data && dut.cnt_o != 0) n_gap++;
    if (dut.phase == ST_DONE && new_data) n_restart++;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t: %s", $time, what);
    end
  endtask

  task automatic make_image(input int kind);
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        automatic int a = D * r + c;
        automatic int dr = r - 14, dc = c - 14;
        case (kind)
          0: img[a] = $urandom_range(0, 128);
          1: img[a] = (dr*dr + dc*dc >= 36 && dr*dr + dc*dc <= 81) ? 128 : 0;
          2: img[a] = $urandom_range(0, 1) ? 2047 - $urandom_range(0, 63) : -2048 + $urandom_range(0, 63);
          default: img[a] = 0;
        endcase
      end
  endtask

  task automatic classify(input int kind, input int gaps, input string name);
    int t0, t1, bad;
    int ok_scores;
    make_image(kind);
    reference();
    for (int p = 0; p < NF; p++) begin
      if (gaps && p > 0 && $urandom_range(0, 3) == 0) begin
        @(negedge clk) new_data = 0;
        @(posedge clk);
      end
      @(negedge clk);
      new_data = 1;
      d_in = word_t'(img[p]);
      @(posedge clk);
    end
    t0 = $time / 10;
    @(negedge clk) new_data = 0;
    // the RAM after the row stage holds tanh(FC1) of every row
    while (dut.phase != ST_COL_MAC) @(negedge clk);
    bad = 0;
    for (int a = 0; a < NF; a++) if (int'(dut.u_ram.mem[a]) != ref_v[a]) bad++;
    chk(bad == 0, $sformatf("%s: %0d words differ after the row stage", name, bad));
    // after the column stage, tanh(FC2) of every column
    while (dut.phase != ST_OUT_MAC) @(negedge clk);
    bad = 0;
    for (int a = 0; a < NF; a++) if (int'(dut.u_ram.mem[a]) != ref_y[a]) bad++;
    chk(bad == 0, $sformatf("%s: %0d words differ after the column stage", name, bad));
    while (!data_ready) begin @(posedge clk); #1; end
    t1 = $time / 10;
    chk(t1 - t0 == LAT, $sformatf("%s: latency %0d expected %0d", name, t1 - t0, LAT));
    ok_scores = 0;
    for (int c = 0; c < NC; c++) if (int'(dut.pe_y[c]) == ref_s[c]) ok_scores++;
    chk(ok_scores == NC, $sformatf("%s: %0d of 10 scores right", name, ok_scores));
    chk(int'(d_out) == ref_digit, $sformatf("%s: d_out %0d expected %0d", name, d_out, ref_digit));
    $display("%s: digit %0d (reference %0d), latency %0d cycles", name, d_out, ref_digit, t1 - t0);
    repeat (5) @(posedge clk);
    #1 chk(data_ready && int'(d_out) == ref_digit, "result held");
  endtask

  initial begin
    {n_sat_pos, n_sat_neg, n_quad_pos, n_quad_neg, n_pe_sat, n_bias, n_rc_hold, n_gap, n_restart} = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    classify(0, 1, "random");
    classify(1, 0, "ring");
    classify(2, 0, "large");
    classify(3, 0, "zero");
    $display("tanh regions: sat+ %0d sat- %0d quad+ %0d quad- %0d", n_sat_pos, n_sat_neg, n_quad_pos, n_quad_neg);
    $display("PE saturations %0d, bias steps %0d, rc-hold cycles %0d, load gaps %0d, restarts %0d",
             n_pe_sat, n_bias, n_rc_hold, n_gap, n_restart);
    chk(n_sat_pos > 0, "tanh +1 region never used");
    chk(n_sat_neg > 0, "tanh -1 region never used");
    chk(n_quad_pos > 0, "tanh positive quadratic region never used");
    chk(n_quad_neg > 0, "tanh negative quadratic region never used");
    chk(n_pe_sat > 0, "PE saturation never happened");
    chk(n_bias == 4 * (2 * D + 1), $sformatf("bias steps %0d", n_bias));
    chk(n_rc_hold == 4 * (NF + 1), $sformatf("output-stage MAC steps %0d", n_rc_hold));
    chk(n_gap > 0, "no gap in the image load");
    chk(n_restart == 3, $sformatf("restarts %0d", n_restart));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
