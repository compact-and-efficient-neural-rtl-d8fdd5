// rg_chain: result registers RG #1 .. #N-1 between the PEs and the Tanh
// block.
//
// After a dot product every PE holds one result.  On `load` all of them are
// taken at once: PE #0 goes straight through the head mux to Tanh, PE #i is
// stored in RG #i.  On each following `shift` cycle RG #i takes RG #i+1 and
// the head shows RG #1, so the N results reach the single Tanh block one per
// cycle in PE order (PE #0 first).  Each register has a 2-way mux in front
// of it choosing its PE or its right-hand neighbour, as drawn in the paper's
// architecture figure; the mux select is `load`.
//
// Timing: head = pe_y[0] in the load cycle, then pe_y[1], pe_y[2], ... in
// the N-1 shift cycles that follow.  RG #N-1 keeps its value on shift.
module rg_chain
  import lst_pkg::*;
#(
  parameter int N = D_IN
) (
  input  logic  clk,
  input  logic  load,
  input  logic  shift,
  input  word_t pe_y [N],
  output word_t head
);

  word_t rg [1:N-1];

  always_ff @(posedge clk)
    if (load) begin
      for (int i = 1; i < N; i++) rg[i] <= pe_y[i];
    end else if (shift) begin
      for (int i = 1; i < N - 1; i++) rg[i] <= rg[i+1];
    end

  assign head = load ? pe_y[0] : rg[1];

endmodule
