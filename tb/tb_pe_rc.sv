// tb_pe_rc: runs dot products through one rc processing element in its
// two modes (row ROM, column ROM), each followed by its
// bias step with the constant 1.0, with the same one-cycle address-to-data
// timing the control unit uses.  Expected results are computed here from
// the ROM content formula with 64-bit integers, then shifted and clamped to
// Q5.7.  Also checks that y holds while mac_en is low, and that in the
// output-layer mode, which this PE does not serve, y does not move at all.
module tb_pe_rc;
  import lst_pkg::*;

  localparam int N   = 28;
  localparam int NO  = 784;
  localparam int IDX = 17;

  logic  clk = 0;
  mode_t mode = MODE_ROW;
  logic [4:0] addr_r = '0, addr_c = '0;
  logic [9:0] addr_o = '0;
  word_t data = '0;
  logic  mac_en = 0, mac_clr = 0;
  word_t y;
  int checks = 0, failures = 0;

  pe_rc #(.N_IN(N), .IDX(IDX)) dut (
    .clk, .mode, .addr_r, .addr_c, .data, .mac_en, .mac_clr, .y);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clamp(longint acc);
    longint s = acc >>> 7;
    return s > 2047 ? 2047 : s < -2048 ? -2048 : int'(s);
  endfunction

  // one dot product of length n (+ bias) in mode m; returns expected y
  task automatic run(input mode_t m, input int n, input int amp, output int exp_y);
    int layer = (m == MODE_ROW) ? LAYER_ROW : (m == MODE_COL) ? LAYER_COL : LAYER_OUT;
    longint acc = 0;
    word_t  d_next;
    logic   bias_next;
    @(negedge clk);
    mode = m;
    for (int j = 0; j <= n + 1; j++) begin
      // cycle j: address j, data for address j-1
      if (j <= n) begin
        addr_r = (m == MODE_ROW) ? 5'(j) : 5'($urandom);
        addr_c = (m == MODE_COL) ? 5'(j) : 5'($urandom);
        addr_o = (m == MODE_OUT) ? 10'(j) : 10'($urandom);
      end
      if (j > 0) begin
        mac_en  = 1;
        mac_clr = (j == 1);
        data    = bias_next ? ONE : d_next;
      end
      bias_next = (j == n);
      d_next    = word_t'($signed(12'($urandom_range(0, 2 * amp)) - 12'(amp)));
      @(posedge clk);
      if (j > 0)
        acc += longint'(data) * longint'(init_weight(layer, IDX, j - 1));
      @(negedge clk);
      mac_en = 0;
    end
    exp_y = clamp(acc);
  endtask

  initial begin
    int e, prev;
    mode_t modes [3] = '{MODE_ROW, MODE_COL, MODE_OUT};
    prev = 0;
    for (int r = 0; r < 12; r++) begin
      automatic mode_t m = modes[r % 3];
      run(m, (m == MODE_OUT) ? 60 : N, (r < 6) ? 128 : 2047, e);
      if (m == MODE_OUT) e = prev;
      prev = e;
      #1;
      checks++;
      if (int'(y) != e) begin
        failures++;
        $display("mode %s: y=%0d expected %0d", m.name(), y, e);
      end
      // held while idle
      repeat (3) @(posedge clk);
      #1;
      checks++;
      if (int'(y) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
