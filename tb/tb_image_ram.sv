// tb_image_ram: fills the 784-word buffer through the D_in side of the write
// mux, overwrites a random subset through the Tanh side, and reads
// everything back in random order against a shadow array, checking the
// one-cycle read latency and that reads past the end return 0.
module tb_image_ram;
  import lst_pkg::*;

  localparam int DEPTH = 784;

  logic clk = 0;
  logic we = 0, din_sel = 0;
  word_t d_in = '0, tanh_in = '0, dout;
  logic [9:0] addr = '0;
  word_t shadow [DEPTH];
  int checks = 0, failures = 0;
  int n_din = 0, n_tanh = 0;

  image_ram #(.DEPTH(DEPTH)) dut (.clk, .we, .din_sel, .d_in, .tanh_in, .addr, .dout);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; din_sel = 0; addr = 10'(a);
      d_in = word_t'($urandom); tanh_in = word_t'($urandom);
      shadow[a] = d_in; n_din++;
    end
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      we = 1; din_sel = 1; addr = 10'(a);
      d_in = word_t'($urandom); tanh_in = word_t'($urandom);
      shadow[a] = tanh_in; n_tanh++;
    end
    for (int n = 0; n < 4000; n++) begin
      automatic int a = $urandom_range(0, 1023);
      @(negedge clk);
      we = 0; din_sel = n[0]; addr = 10'(a);
      d_in = word_t'($urandom); tanh_in = word_t'($urandom);
      @(posedge clk); #1;
      checks++;
      if (dout != (a < DEPTH ? shadow[a] : word_t'(0))) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %0d expected %0d", a, dout,
                                    a < DEPTH ? shadow[a] : word_t'(0));
      end
    end
    $display("writes: D_in %0d Tanh %0d", n_din, n_tanh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
