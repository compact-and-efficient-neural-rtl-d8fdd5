// lst_ref_pkg: bit-exact software model of the LST-1 classifier for the
// testbenches, written independently of the RTL.  For an image side d and
// nc classes it computes, from the ROM content formula
// lst_pkg::init_weight, the row result V (tanh of FC1 on every row), the
// column result Y (tanh of FC2 on every column), the nc class scores and
// the arg max (lowest index on ties).  Sums are 64-bit integers; every dot
// product is shifted right by 7 (floor) and clamped to [-2048, 2047], and
// tanh is evaluated as sign(x) beyond |x| = 2 and x -/+ floor(x*x/512)
// inside.  Also holds a generator of synthetic digit-like test images.
package lst_ref_pkg;
  import lst_pkg::*;

  function automatic int clamp12(longint acc);
    longint s = acc >>> FRAC_W;
    return s > 2047 ? 2047 : s < -2048 ? -2048 : int'(s);
  endfunction

  function automatic int f_tanh(int v);
    if (v > 256)  return 128;
    if (v < -256) return -128;
    return v >= 0 ? v - (v * v) / 512 : v + (v * v) / 512;
  endfunction

  typedef int vec_t [];

  task automatic reference(input int d, input int nc, input vec_t img,
                           output vec_t v, output vec_t y, output vec_t s,
                           output int digit);
    longint acc;
    v = new[d * d];
    y = new[d * d];
    s = new[nc];
    for (int k = 0; k < d; k++)
      for (int i = 0; i < d; i++) begin
        acc = longint'(init_weight(LAYER_ROW, i, d)) * 128;
        for (int j = 0; j < d; j++) acc += longint'(init_weight(LAYER_ROW, i, j)) * img[d*k + j];
        v[d*k + i] = f_tanh(clamp12(acc));
      end
    for (int k = 0; k < d; k++)
      for (int i = 0; i < d; i++) begin
        acc = longint'(init_weight(LAYER_COL, i, d)) * 128;
        for (int j = 0; j < d; j++) acc += longint'(init_weight(LAYER_COL, i, j)) * v[d*j + k];
        y[d*i + k] = f_tanh(clamp12(acc));
      end
    digit = 0;
    for (int c = 0; c < nc; c++) begin
      acc = longint'(init_weight(LAYER_OUT, c, d * d)) * 128;
      for (int a = 0; a < d * d; a++) acc += longint'(init_weight(LAYER_OUT, c, a)) * y[a];
      s[c] = clamp12(acc);
      if (s[c] > s[digit]) digit = c;
    end
  endtask

  // Synthetic "handwritten" image on a d x d grid: 1-3 random thick strokes
  // (line segments) of intensity 1.0 with a soft edge, plus light noise,
  // roughly like an MNIST digit scaled to Q5.7 (0..128).
  function automatic vec_t make_strokes(int d);
    vec_t img = new[d * d];
    int n = 1 + $urandom_range(0, 2);
    foreach (img[a]) img[a] = $urandom_range(0, 3);
    for (int s = 0; s < n; s++) begin
      int x0 = $urandom_range(d / 5, d - 1 - d / 5), y0 = $urandom_range(d / 5, d - 1 - d / 5);
      int x1 = $urandom_range(d / 5, d - 1 - d / 5), y1 = $urandom_range(d / 5, d - 1 - d / 5);
      for (int t = 0; t <= 32; t++) begin
        int cx = x0 + ((x1 - x0) * t) / 32, cy = y0 + ((y1 - y0) * t) / 32;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            int px = cx + dx, py = cy + dy;
            if (px >= 0 && px < d && py >= 0 && py < d) begin
              int val = (dx == 0 && dy == 0) ? 128 : 80;
              if (img[d*py + px] < val) img[d*py + px] = val;
            end
          end
      end
    end
    return img;
  endfunction

endpackage
