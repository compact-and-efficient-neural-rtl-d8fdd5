// lst1_top: LST-1 handwritten-digit classifier on a single physical layer.
//
// The network: a learned 2-D separable transform LST 28x28 (FC1 shared by
// all image rows, tanh, then FC2 shared by all columns of that result, tanh),
// flattening, a 784x10 fully connected layer and an arg max.  The hardware
// computes it with D = 28 processing elements working in parallel on one
// broadcast data word per cycle: PE #i computes output i of FC1 / FC2, and
// PEs #0..#9 (type rco) also compute the ten class scores.  One RAM holds the
// image and is overwritten in place by each layer's result; one Tanh block
// serves all PEs through the RG shift chain; the counters block addresses
// RAM and ROMs; the control unit sequences load, rows, columns, output layer
// and max index.
//
// Bus lines (numbered as in the paper's architecture figure):
//   1 cnt_r  ROW ROM address       2 cnt_c  COL ROM address
//   3 cnt_o  RAM / OUTPUT ROM address   4 RAM Dout (data to every PE)
// On the bias step of a dot product the data line carries the constant 1.0
// instead of RAM Dout (biases are stored as the last ROM word); that mux is
// this design's.
//
// Interface: feed the 784 pixels row-major as Q5.7 words on d_in, one per
// cycle with new_data = 1 (gaps allowed).  4035 cycles after the last pixel
// data_ready rises and d_out holds the digit; both stay until the next
// new_data, which is also the first pixel of the next image.  reset is
// synchronous, active high.
module lst1_top
  import lst_pkg::*;
#(
  parameter int D     = D_IN,      // image side; number of PEs
  parameter int N_OUT = N_CLS,     // classes; number of rco PEs
  parameter int RAW   = $clog2(D + 1),
  parameter int OAW   = $clog2(D * D + 1),
  parameter int IW    = $clog2(N_OUT)
) (
  input  logic          clk,
  input  logic          reset,
  input  logic          new_data,
  input  word_t         d_in,
  output logic          data_ready,
  output logic [IW-1:0] d_out
);

  // control
  state_t phase;
  mode_t  mode;
  logic   clr_j, inc_j, clr_w, inc_w, clr_k, inc_k;
  logic   j_last, j_bias, w_last, k_last;
  logic   mac_en, mac_clr, bias_sel, ram_we, din_sel;
  logic   chain_load, chain_shift, max_capture;

  // bus
  logic [RAW-1:0] cnt_r, cnt_c;
  logic [OAW-1:0] cnt_o;
  word_t          ram_dout, pe_data;

  // PE results, chain, activation
  word_t pe_y [D];
  word_t head, act;

  control_unit u_ctrl (
    .clk, .reset, .new_data,
    .j_last, .j_bias, .w_last, .k_last,
    .phase, .clr_j, .inc_j, .clr_w, .inc_w, .clr_k, .inc_k,
    .mode, .mac_en, .mac_clr, .bias_sel, .ram_we, .din_sel,
    .chain_load, .chain_shift, .max_capture, .data_ready);

  counters_block #(.D(D)) u_cnt (
    .clk, .reset, .phase,
    .clr_j, .inc_j, .clr_w, .inc_w, .clr_k, .inc_k,
    .cnt_r, .cnt_c, .cnt_o, .j_last, .j_bias, .w_last, .k_last);

  image_ram #(.DEPTH(D * D)) u_ram (
    .clk, .we(ram_we), .din_sel, .d_in, .tanh_in(act), .addr(cnt_o),
    .dout(ram_dout));

  assign pe_data = bias_sel ? ONE : ram_dout;

  for (genvar i = 0; i < D; i++) begin : g_pe
    if (i < N_OUT) begin : g_rco
      pe_rco #(.N_IN(D), .N_OUT_IN(D * D), .IDX(i)) u_pe (
        .clk, .mode, .addr_r(cnt_r), .addr_c(cnt_c), .addr_o(cnt_o),
        .data(pe_data), .mac_en, .mac_clr, .y(pe_y[i]));
    end else begin : g_rc
      pe_rc #(.N_IN(D), .IDX(i)) u_pe (
        .clk, .mode, .addr_r(cnt_r), .addr_c(cnt_c),
        .data(pe_data), .mac_en, .mac_clr, .y(pe_y[i]));
    end
  end

  rg_chain #(.N(D)) u_chain (
    .clk, .load(chain_load), .shift(chain_shift), .pe_y, .head);

  tanh_approx u_tanh (.x(head), .y(act));

  max_index #(.N(N_OUT)) u_max (
    .clk, .capture(max_capture), .scores(pe_y[0:N_OUT-1]), .d_out);

  // the result stays valid and unchanged until the host sends new data
  assert property (@(posedge clk) disable iff (reset)
    data_ready && !new_data |=> data_ready && $stable(d_out));
  // the computation ends with exactly one capture, right before data_ready
  assert property (@(posedge clk) disable iff (reset)
    $rose(data_ready) |-> $past(max_capture));

endmodule
