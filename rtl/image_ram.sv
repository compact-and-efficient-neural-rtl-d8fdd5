// image_ram: the single image buffer of the classifier, with its write mux.
//
// DEPTH words of Q5.7, row-major (element (r, c) of the 28x28 image at
// address 28*r + c).  It first receives the input image from D_in, then the
// tanh(FC1) result is written back over each row and the tanh(FC2) result
// over each column, so one buffer serves all stages (in-place computation,
// as in the paper).  The write data comes from a 2-way mux: din_sel = 0
// takes d_in (image load), din_sel = 1 the Tanh output.
//
// Single port: one address for reads and writes.  Reads are synchronous
// (dout = mem[addr] one cycle later); an address past the end reads 0.  The
// schedule never reads and writes in the same cycle.
module image_ram
  import lst_pkg::*;
#(
  parameter int DEPTH = D_IN * D_IN,
  parameter int AW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          we,
  input  logic          din_sel,
  input  word_t         d_in,
  input  word_t         tanh_in,
  input  logic [AW-1:0] addr,
  output word_t         dout
);

  word_t mem [DEPTH];
  word_t wdata;

  assign wdata = din_sel ? tanh_in : d_in;

  always_ff @(posedge clk) begin
    if (we && int'(addr) < DEPTH) mem[addr] <= wdata;
    dout <= (int'(addr) < DEPTH) ? mem[addr] : '0;
  end

endmodule
