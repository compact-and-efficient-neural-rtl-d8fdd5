// pe_rco: processing element used for the row layer (FC1), the column layer
// (FC2) and the output layer.
//
// Holds three weight ROMs: ROW ROM (row IDX of W1 plus bias), COL ROM (row
// IDX of W2 plus bias) and OUTPUT LAYER ROM (row IDX of the 784x10 output
// matrix plus bias).  All three are addressed every cycle from the shared
// bus (addr_r, addr_c, addr_o); a 3-way mux chosen by `mode` passes one ROM
// word to the MAC core, which multiplies it with the broadcast `data` word.
// This structure is the paper's (Fig. 6 of the original work).  The `mode`
// select, the one-cycle ROM latency and the MAC enable/clear controls are
// this design's choices.
//
// Timing: addresses at cycle t give ROM words at t+1; the caller asserts
// mac_en/mac_clr and presents `data` at t+1 (the RAM has the same one-cycle
// latency).  y is the saturated Q5.7 result of all terms so far.
module pe_rco
  import lst_pkg::*;
#(
  parameter int N_IN     = D_IN,          // inputs of FC1/FC2
  parameter int N_OUT_IN = D_IN * D_IN,   // inputs of the output layer
  parameter int IDX      = 0,             // matrix row held by this PE
  parameter int RAW      = $clog2(N_IN + 1),
  parameter int OAW      = $clog2(N_OUT_IN + 1)
) (
  input  logic           clk,
  input  mode_t          mode,
  input  logic [RAW-1:0] addr_r,
  input  logic [RAW-1:0] addr_c,
  input  logic [OAW-1:0] addr_o,
  input  word_t          data,
  input  logic           mac_en,
  input  logic           mac_clr,
  output word_t          y
);

  word_t w_row, w_col, w_out, w_sel;

  weight_rom #(.DEPTH(N_IN + 1), .LAYER(LAYER_ROW), .ROW(IDX)) u_row_rom (
    .clk, .addr(addr_r), .q(w_row));
  weight_rom #(.DEPTH(N_IN + 1), .LAYER(LAYER_COL), .ROW(IDX)) u_col_rom (
    .clk, .addr(addr_c), .q(w_col));
  weight_rom #(.DEPTH(N_OUT_IN + 1), .LAYER(LAYER_OUT), .ROW(IDX)) u_out_rom (
    .clk, .addr(addr_o), .q(w_out));

  always_comb
    unique case (mode)
      MODE_ROW: w_sel = w_row;
      MODE_COL: w_sel = w_col;
      default:  w_sel = w_out;
    endcase

  mac_unit u_mac (.clk, .en(mac_en), .clr(mac_clr), .data, .weight(w_sel), .y);

endmodule
