// lst_pkg: types, constants and the weight-content function shared by the
// LST-1 classifier (learned 2-D separable transform 28x28 followed by a
// 784x10 fully connected layer and an arg-max).
//
// Number format: every weight and every internal data word is a 12-bit
// two's-complement fixed-point value with 5 integer bits (sign included) and
// 7 fractional bits (Q5.7), as in the published FPGA implementation.  The
// accumulator width, the state encoding and the weight contents are choices
// of this design.
//
// The trained weights of the network are not published.  The ROMs are
// therefore filled at elaboration time by init_weight(), a fixed integer hash
// of (layer, row, column) mapped to [-0.25, +0.25).  To load a trained model,
// replace the body of init_weight() (or the ROM initialisation) with the real
// table; nothing else depends on the values.
package lst_pkg;

  // ---- sizes (defaults of the LST-1 model) ---------------------------------
  localparam int DATA_W = 12;          // weights and internal data
  localparam int FRAC_W = 7;           // fractional bits of Q5.7
  localparam int D_IN   = 28;          // image side, d_in = d_out = 28
  localparam int N_CLS  = 10;          // digits 0..9
  localparam int ACC_W  = 2*DATA_W + 10; // 785 products fit without wrap

  typedef logic signed [DATA_W-1:0] word_t;

  localparam word_t ONE = word_t'(1 << FRAC_W);   // 1.0 in Q5.7

  // ROM layer identifiers used by init_weight()
  localparam int LAYER_ROW = 0;        // FC1, applied to image rows
  localparam int LAYER_COL = 1;        // FC2, applied to columns
  localparam int LAYER_OUT = 2;        // output FC layer

  // Which ROM a processing element reads.
  typedef enum logic [1:0] {
    MODE_ROW = 2'd0,
    MODE_COL = 2'd1,
    MODE_OUT = 2'd2
  } mode_t;

  // Schedule phases of the control unit; the counters block forms its
  // addresses from the phase.
  typedef enum logic [3:0] {
    ST_LOAD      = 4'd0,   // take D_in words into the RAM
    ST_ROW_MAC   = 4'd1,   // FC1: stream one image row through all PEs
    ST_ROW_DRAIN = 4'd2,   // last MAC step of the row
    ST_ROW_WR    = 4'd3,   // write tanh(FC1) back into the same row
    ST_COL_MAC   = 4'd4,   // FC2: stream one column through all PEs
    ST_COL_DRAIN = 4'd5,
    ST_COL_WR    = 4'd6,   // write tanh(FC2) back into the same column
    ST_OUT_MAC   = 4'd7,   // output layer: stream all 784 words
    ST_OUT_DRAIN = 4'd8,
    ST_MAX       = 4'd9,   // register the arg max
    ST_DONE      = 4'd10   // D_out valid
  } state_t;

  // Saturate a wide signed value to a Q5.7 word.
  function automatic word_t sat_word(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (DATA_W-1)) - 1);
    localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (DATA_W-1));
    if (v > MAXV)      return word_t'(MAXV);
    else if (v < MINV) return word_t'(MINV);
    else               return word_t'(v);
  endfunction

  // ROM contents: weight (or bias, at col = number of inputs) of row `row`
  // of matrix `layer`.  Integer hash, result in [-32, 31] LSB = [-0.25, 0.25).
  function automatic word_t init_weight(input int layer, input int row, input int col);
    logic [31:0] h;
    h = 32'(layer) * 32'h9E37_79B1 ^ 32'(row) * 32'h85EB_CA77 ^ 32'(col) * 32'hC2B2_AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return word_t'($signed(h[20:15]));
  endfunction

endpackage
