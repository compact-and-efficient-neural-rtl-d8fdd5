// pe_rc: processing element used only for the row layer (FC1) and the column
// layer (FC2).
//
// Same as pe_rco without the output-layer ROM (Fig. 7 of the original work):
// ROW ROM and COL ROM, each holding row IDX of W1 / W2 plus its bias, a
// 2-way mux chosen by `mode`, and a MAC core fed with the broadcast `data`.
// In the output stage (mode = MODE_OUT) this PE takes no part: its MAC is
// not enabled and its result is simply held.  Timing as pe_rco: ROM words
// appear one cycle after the address; mac_en/mac_clr/data are presented in
// that cycle.
module pe_rc
  import lst_pkg::*;
#(
  parameter int N_IN = D_IN,
  parameter int IDX  = 10,
  parameter int RAW  = $clog2(N_IN + 1)
) (
  input  logic           clk,
  input  mode_t          mode,
  input  logic [RAW-1:0] addr_r,
  input  logic [RAW-1:0] addr_c,
  input  word_t          data,
  input  logic           mac_en,
  input  logic           mac_clr,
  output word_t          y
);

  word_t w_row, w_col, w_sel;

  weight_rom #(.DEPTH(N_IN + 1), .LAYER(LAYER_ROW), .ROW(IDX)) u_row_rom (
    .clk, .addr(addr_r), .q(w_row));
  weight_rom #(.DEPTH(N_IN + 1), .LAYER(LAYER_COL), .ROW(IDX)) u_col_rom (
    .clk, .addr(addr_c), .q(w_col));

  assign w_sel = (mode == MODE_COL) ? w_col : w_row;

  mac_unit u_mac (.clk, .en(mac_en && mode != MODE_OUT), .clr(mac_clr), .data,
                  .weight(w_sel), .y);

endmodule
