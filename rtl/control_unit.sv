// control_unit: finite-state machine that runs the five stages of one
// classification on the single physical layer of PEs.
//
//   1 load    each cycle with new_data = 1 writes D_in to the RAM; after
//             D*D words the computation starts by itself.
//   2 rows    for k = 0..D-1: stream row k (D words, then the constant 1.0
//             for the bias) through all D PEs (ROW ROMs), wait one cycle for
//             the last MAC step, then load the RG chain and write the D
//             results through Tanh back over row k.
//   3 columns the same over column k with the COL ROMs.
//   4 output  stream all D*D words (plus the bias step) through the first
//             N_CLS PEs (OUTPUT LAYER ROMs); no activation.
//   5 max     register the arg max of the N_CLS results into D_out and
//             raise data_ready, which stays high until the next new_data.
//
// The MAC controls (mac_en, mac_clr, bias_sel) are registered here so that
// they arrive together with the RAM and ROM words, one cycle after the
// address.  Latency from the edge that takes the last pixel to data_ready:
// 2*D*(2*D+2) + D*D + 3 cycles (4035 for D = 28).  The stage order and the
// port names reset / new_data / data_ready are the paper's; the handshake,
// the per-state timing and the synchronous active-high reset are this
// design's choices.
module control_unit
  import lst_pkg::*;
(
  input  logic   clk,
  input  logic   reset,
  input  logic   new_data,
  // status from the counters block
  input  logic   j_last,
  input  logic   j_bias,
  input  logic   w_last,
  input  logic   k_last,
  // counter controls
  output state_t phase,
  output logic   clr_j,
  output logic   inc_j,
  output logic   clr_w,
  output logic   inc_w,
  output logic   clr_k,
  output logic   inc_k,
  // datapath controls
  output mode_t  mode,
  output logic   mac_en,
  output logic   mac_clr,
  output logic   bias_sel,
  output logic   ram_we,
  output logic   din_sel,
  output logic   chain_load,
  output logic   chain_shift,
  output logic   max_capture,
  output logic   data_ready
);

  state_t state, next;
  logic   issue;          // a dot-product address is issued this cycle
  logic   first_term;     // ... and it is the first of its dot product
  logic   first_wr;       // first write-back cycle of a vector

  assign phase = state;

  always_ff @(posedge clk)
    if (reset) state <= ST_LOAD;
    else       state <= next;

  // MAC controls follow the address by one cycle (RAM/ROM read latency).
  always_ff @(posedge clk)
    if (reset) begin
      mac_en   <= 1'b0;
      mac_clr  <= 1'b0;
      bias_sel <= 1'b0;
    end else begin
      mac_en   <= issue;
      mac_clr  <= issue && first_term;
      bias_sel <= issue && j_bias;
    end

  // first_term: set when a vector starts, cleared after its first address.
  always_ff @(posedge clk)
    if (reset)                              first_term <= 1'b1;
    else if (issue)                         first_term <= 1'b0;
    else if (state != ST_ROW_MAC && state != ST_COL_MAC && state != ST_OUT_MAC)
                                            first_term <= 1'b1;

  // first_wr: high in the first cycle of a write-back run.
  always_ff @(posedge clk)
    if (reset) first_wr <= 1'b1;
    else       first_wr <= !(state == ST_ROW_WR || state == ST_COL_WR) || w_last;

  always_comb begin
    next        = state;
    issue       = 1'b0;
    clr_j       = 1'b0;
    inc_j       = 1'b0;
    clr_w       = 1'b0;
    inc_w       = 1'b0;
    clr_k       = 1'b0;
    inc_k       = 1'b0;
    ram_we      = 1'b0;
    din_sel     = 1'b0;
    chain_load  = 1'b0;
    chain_shift = 1'b0;
    max_capture = 1'b0;
    data_ready  = 1'b0;
    unique case (state)
      ST_LOAD:
        if (new_data) begin
          ram_we = 1'b1;
          if (j_last) begin
            clr_j = 1'b1;
            clr_k = 1'b1;
            next  = ST_ROW_MAC;
          end else
            inc_j = 1'b1;
        end
      ST_ROW_MAC, ST_COL_MAC, ST_OUT_MAC: begin
        issue = 1'b1;
        if (j_last) begin
          clr_j = 1'b1;
          next  = (state == ST_ROW_MAC) ? ST_ROW_DRAIN :
                  (state == ST_COL_MAC) ? ST_COL_DRAIN : ST_OUT_DRAIN;
        end else
          inc_j = 1'b1;
      end
      ST_ROW_DRAIN: begin clr_w = 1'b1; next = ST_ROW_WR; end
      ST_COL_DRAIN: begin clr_w = 1'b1; next = ST_COL_WR; end
      ST_ROW_WR, ST_COL_WR: begin
        ram_we      = 1'b1;
        din_sel     = 1'b1;
        chain_load  = first_wr;
        chain_shift = !first_wr;
        if (w_last) begin
          clr_w = 1'b1;
          if (k_last) begin
            clr_k = 1'b1;
            next  = (state == ST_ROW_WR) ? ST_COL_MAC : ST_OUT_MAC;
          end else begin
            inc_k = 1'b1;
            next  = (state == ST_ROW_WR) ? ST_ROW_MAC : ST_COL_MAC;
          end
        end else
          inc_w = 1'b1;
      end
      ST_OUT_DRAIN: next = ST_MAX;
      ST_MAX: begin max_capture = 1'b1; next = ST_DONE; end
      ST_DONE: begin
        data_ready = 1'b1;
        if (new_data) begin             // first word of the next image
          ram_we = 1'b1;
          inc_j  = 1'b1;
          next   = ST_LOAD;
        end
      end
      default: next = ST_LOAD;
    endcase
  end

  always_comb
    unique case (state)
      ST_COL_MAC, ST_COL_DRAIN, ST_COL_WR: mode = MODE_COL;
      ST_OUT_MAC, ST_OUT_DRAIN, ST_MAX:    mode = MODE_OUT;
      default:                             mode = MODE_ROW;
    endcase

  // a write-back run always starts with a chain load
  assert property (@(posedge clk) disable iff (reset)
    (state == ST_ROW_DRAIN || state == ST_COL_DRAIN) |=> chain_load);
  // the MAC is never asked to accumulate during a write-back
  assert property (@(posedge clk) disable iff (reset)
    ram_we && din_sel |-> !mac_en);

endmodule
