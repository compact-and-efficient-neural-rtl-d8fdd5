// tb_lst1_small: the same classifier built for an 8x8 image with 4 classes
// (lst1_top #(.D(8), .N_OUT(4))), to show that the image side, the number
// of PEs, the address widths and the schedule all follow the parameters.
// Ten random images are classified; the RAM after the column stage, the
// four class scores, D_out and the latency 2*D*(2*D+2) + D*D + 3 = 355
// cycles are checked against the reference model of lst_ref_pkg.
module tb_lst1_small;
  import lst_pkg::*;
  import lst_ref_pkg::*;

  localparam int D   = 8;
  localparam int NF  = D * D;
  localparam int NC  = 4;
  localparam int LAT = 2 * D * (2 * D + 2) + NF + 3;

  logic clk = 0, reset = 1, new_data = 0;
  word_t d_in = '0;
  logic data_ready;
  logic [1:0] d_out;
  int checks = 0, failures = 0;

  lst1_top #(.D(D), .N_OUT(NC)) dut (.clk, .reset, .new_data, .d_in, .data_ready, .d_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t img, v, y, s;
    int digit, t0, t1, bad;
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    for (int n = 0; n < 10; n++) begin
      img = new[NF];
      foreach (img[a]) img[a] = (n < 5) ? $urandom_range(0, 128) : $urandom_range(0, 1023) - 512;
      reference(D, NC, img, v, y, s, digit);
      for (int p = 0; p < NF; p++) begin
        @(negedge clk);
        new_data = 1;
        d_in = word_t'(img[p]);
        @(posedge clk);
      end
      t0 = $time / 10;
      @(negedge clk) new_data = 0;
      while (dut.phase != ST_OUT_MAC) @(negedge clk);
      bad = 0;
      for (int a = 0; a < NF; a++) if (int'(dut.u_ram.mem[a]) != y[a]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("image %0d: %0d RAM words differ", n, bad); end
      while (!data_ready) begin @(posedge clk); #1; end
      t1 = $time / 10;
      checks++;
      if (t1 - t0 != LAT) begin failures++; $display("image %0d: latency %0d", n, t1 - t0); end
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (int'(dut.pe_y[c]) != s[c]) failures++;
      end
      checks++;
      if (int'(d_out) != digit) begin
        failures++;
        $display("image %0d: d_out %0d expected %0d", n, d_out, digit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
