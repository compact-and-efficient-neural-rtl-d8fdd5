// max_index: final stage of the classifier, the arg max over the N results
// of the output layer (the PE_rco outputs #0 .. #N-1).
//
// A softmax does not change which class is largest, so the classifier only
// needs the index of the maximum.  The comparison is a combinational scan in
// index order using strict "greater than", so a tie goes to the lowest
// index; `capture` registers the winner into d_out.  The paper gives the
// function; the parallel compare, the tie rule and the 4-bit D_out are this
// design's choices.
module max_index
  import lst_pkg::*;
#(
  parameter int N  = N_CLS,
  parameter int IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          capture,
  input  word_t         scores [N],
  output logic [IW-1:0] d_out
);

  logic [IW-1:0] best_i;
  word_t         best_v;

  always_comb begin
    best_i = '0;
    best_v = scores[0];
    for (int i = 1; i < N; i++)
      if (scores[i] > best_v) begin
        best_i = IW'(i);
        best_v = scores[i];
      end
  end

  always_ff @(posedge clk)
    if (capture) d_out <= best_i;

endmodule
