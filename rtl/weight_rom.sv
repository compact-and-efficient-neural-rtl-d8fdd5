// weight_rom: read-only store for one row of one weight matrix of the
// classifier (DEPTH-1 weights followed by the bias word).
//
// Contents are fixed at elaboration by lst_pkg::init_weight(LAYER, ROW, i),
// i = 0 .. DEPTH-1, standing in for the trained weights, which are not
// published.  Reads are synchronous: q holds mem[addr] one cycle after addr,
// like an FPGA block RAM; an address past the end reads 0.  Each processing
// element owns one such ROM per layer it serves (rows, columns, output
// layer), so all PEs read their weights in parallel from one shared address.
module weight_rom
  import lst_pkg::*;
#(
  parameter int DEPTH = D_IN + 1,
  parameter int LAYER = LAYER_ROW,
  parameter int ROW   = 0,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output word_t         q
);

  word_t mem [DEPTH];

  initial
    for (int i = 0; i < DEPTH; i++)
      mem[i] = init_weight(LAYER, ROW, i);

  always_ff @(posedge clk)
    q <= (int'(addr) < DEPTH) ? mem[addr] : '0;

endmodule
