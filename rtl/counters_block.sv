// counters_block: loop counters and address generation.
//
// Three counters run the schedule: k (which row / column is being
// processed, 0..D-1), j (element of the current dot product, 0..D with D
// addressing the bias word; 0..D*D in the output stage; 0..D*D-1 while
// loading) and w (which result is being written back, 0..D-1).  The control
// unit clears and steps them; the block turns them into the three bus
// address lines of the architecture:
//   cnt_r  ROW ROM address  = j in the row stage, else 0
//   cnt_c  COL ROM address  = j in the column stage, else 0
//   cnt_o  RAM address, also the OUTPUT LAYER ROM address:
//            load           j
//            row read       D*k + j       row write   D*k + w
//            column read    D*j + k       column write D*w + k
//            output stage   j  (j = D*D is the bias step)
// The paper names the block and its outputs cnt_r, cnt_c, cnt_o and draws
// the RAM address and cnt_o on the same bus line; the counters and address
// formulas are this design's own.  Status flags are combinational.
module counters_block
  import lst_pkg::*;
#(
  parameter int D   = D_IN,
  parameter int RAW = $clog2(D + 1),
  parameter int OAW = $clog2(D * D + 1)
) (
  input  logic           clk,
  input  logic           reset,
  input  state_t         phase,
  input  logic           clr_j,
  input  logic           inc_j,
  input  logic           clr_w,
  input  logic           inc_w,
  input  logic           clr_k,
  input  logic           inc_k,
  output logic [RAW-1:0] cnt_r,
  output logic [RAW-1:0] cnt_c,
  output logic [OAW-1:0] cnt_o,
  output logic           j_last,
  output logic           j_bias,
  output logic           w_last,
  output logic           k_last
);

  localparam int N_FLAT = D * D;

  logic [OAW-1:0] j;
  logic [RAW-1:0] w, k;

  always_ff @(posedge clk) begin
    if (reset || clr_j) j <= '0; else if (inc_j) j <= j + 1'b1;
    if (reset || clr_w) w <= '0; else if (inc_w) w <= w + 1'b1;
    if (reset || clr_k) k <= '0; else if (inc_k) k <= k + 1'b1;
  end

  always_comb begin
    cnt_r = (phase == ST_ROW_MAC) ? RAW'(j) : '0;
    cnt_c = (phase == ST_COL_MAC) ? RAW'(j) : '0;
    unique case (phase)
      ST_ROW_MAC: cnt_o = OAW'(D * int'(k) + int'(j));
      ST_ROW_WR:  cnt_o = OAW'(D * int'(k) + int'(w));
      ST_COL_MAC: cnt_o = OAW'(D * int'(j) + int'(k));
      ST_COL_WR:  cnt_o = OAW'(D * int'(w) + int'(k));
      ST_LOAD, ST_OUT_MAC: cnt_o = j;
      default:    cnt_o = '0;
    endcase
    unique case (phase)
      ST_LOAD:                j_last = (int'(j) == N_FLAT - 1);
      ST_ROW_MAC, ST_COL_MAC: j_last = (int'(j) == D);
      ST_OUT_MAC:             j_last = (int'(j) == N_FLAT);
      default:                j_last = 1'b0;
    endcase
    j_bias = ((phase == ST_ROW_MAC || phase == ST_COL_MAC) && int'(j) == D) ||
             (phase == ST_OUT_MAC && int'(j) == N_FLAT);
    w_last = (int'(w) == D - 1);
    k_last = (int'(k) == D - 1);
  end

endmodule
