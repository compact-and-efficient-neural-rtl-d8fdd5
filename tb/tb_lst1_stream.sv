// tb_lst1_stream: the classification workload at full size.  Sixteen
// synthetic digit-like images (random thick strokes, 0..1.0 in Q5.7) are
// sent back to back: each image's first pixel follows data_ready in the
// very next cycle and the pixels come one per cycle, as a host streaming a
// test set would send them.  Every D_out and every class score is checked
// against the bit-exact reference model of lst_ref_pkg; the testbench also
// checks that one image takes exactly 784 + 4035 cycles from its first
// pixel to data_ready, and reports the resulting rate.
module tb_lst1_stream;
  import lst_pkg::*;
  import lst_ref_pkg::*;

  localparam int D      = 28;
  localparam int NF     = D * D;
  localparam int NC     = 10;
  localparam int N_IMG  = 16;
  localparam int PERIOD = NF + 2 * D * (2 * D + 2) + NF + 3;   // 4819 cycles

  logic clk = 0, reset = 1, new_data = 0;
  word_t d_in = '0;
  logic data_ready;
  logic [3:0] d_out;
  int checks = 0, failures = 0;
  int hist [NC];

  lst1_top dut (.clk, .reset, .new_data, .d_in, .data_ready, .d_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N_IMG * PERIOD + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t img, v, y, s;
    int digit, t_first, t_ready, ok;
    hist = '{default: 0};
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    for (int n = 0; n < N_IMG; n++) begin
      img = make_strokes(D);
      reference(D, NC, img, v, y, s, digit);
      for (int p = 0; p < NF; p++) begin
        @(negedge clk);
        new_data = 1;
        d_in = word_t'(img[p]);
        @(posedge clk);
        if (p == 0) t_first = $time / 10;
      end
      @(negedge clk) new_data = 0;
      while (!data_ready) begin @(posedge clk); #1; end
      t_ready = $time / 10;
      checks++;
      if (t_ready - t_first != PERIOD - 1) begin
        failures++;
        $display("image %0d: %0d cycles from first pixel, expected %0d", n, t_ready - t_first, PERIOD - 1);
      end
      ok = 0;
      for (int c = 0; c < NC; c++) if (int'(dut.pe_y[c]) == s[c]) ok++;
      checks++;
      if (ok != NC) begin failures++; $display("image %0d: %0d of 10 scores right", n, ok); end
      checks++;
      if (int'(d_out) != digit) begin
        failures++;
        $display("image %0d: d_out %0d expected %0d", n, d_out, digit);
      end
      hist[digit]++;
    end
    $display("%0d images, %0d cycles per image (%0d per image back to back)", N_IMG, PERIOD - 1, PERIOD);
    $display("digits reported: %p", hist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
