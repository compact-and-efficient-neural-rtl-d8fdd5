// mac_unit: multiply-accumulate core of a processing element.
//
// Each enabled cycle adds data*weight (Q5.7 x Q5.7 = Q10.14) to an ACC_W-bit
// accumulator; with clr the product replaces the accumulator, which starts a
// new dot product without a separate clearing cycle.  The result y is the
// accumulator brought back to Q5.7 (arithmetic shift right by FRAC_W, i.e.
// truncation toward minus infinity) and saturated to the 12-bit range.
// A bias is handled like any other weight: the control feeds the constant
// 1.0 as data on the bias step, since the bias is stored as the last word of
// the weight row.
//
// Timing: y reflects all terms accepted up to and including the previous
// clock edge.  The paper names the MAC core; accumulator width, rounding and
// saturation are choices of this design.
module mac_unit
  import lst_pkg::*;
#(
  parameter int ACC_BITS = ACC_W
) (
  input  logic  clk,
  input  logic  en,
  input  logic  clr,
  input  word_t data,
  input  word_t weight,
  output word_t y
);

  logic signed [ACC_BITS-1:0] acc;
  logic signed [ACC_BITS-1:0] prod;
  logic signed [ACC_BITS-1:0] scaled;

  assign prod   = ACC_BITS'(data) * ACC_BITS'(weight);
  assign scaled = acc >>> FRAC_W;

  always_ff @(posedge clk)
    if (en) acc <= (clr ? '0 : acc) + prod;

  always_comb begin
    if (scaled > ACC_BITS'(32'sd2047))       y = word_t'(12'sh7ff);
    else if (scaled < ACC_BITS'(-32'sd2048)) y = word_t'(12'sh800);
    else                                     y = word_t'(scaled);
  end

endmodule
