// wino_pkg: constants shared by the blocks of the Winograd F(2,3) module.
//
// The module computes two consecutive outputs of a 3-tap FIR filter (one step
// of a 1-D convolution) from a tile of four input samples, using four
// multipliers instead of six. The filter taps h0..h2 are folded in advance
// into four weights s0..s3; two of them carry a factor 1/2, so every weight is
// held in signed fixed point with one fractional bit ("Q.1"): the stored bit
// pattern is 2*s. This keeps the halving exact for integer taps.
//
// The sample and tap widths are not fixed by the algorithm; 16 bits each is
// this design's choice. All other widths follow from them without rounding.
package wino_pkg;

  // Default operand widths (two's complement integers).
  parameter int unsigned DATA_W_DEF = 16;  // input samples x0..x3
  parameter int unsigned COEF_W_DEF = 16;  // filter taps h0..h2

  // Tile geometry of the F(2,3) algorithm.
  localparam int unsigned N_IN   = 4;  // samples per tile
  localparam int unsigned N_TAP  = 3;  // filter taps
  localparam int unsigned N_MUL  = 4;  // multipliers / weights
  localparam int unsigned N_OUT  = 2;  // outputs per tile

  // Width of a weight s_i in Q.1: 2*s1 = h0+h1+h2 needs two bits above COEF_W.
  function automatic int unsigned s_width(int unsigned coef_w);
    return coef_w + 2;
  endfunction

  // Width of a pre-adder result (sum or difference of two samples).
  function automatic int unsigned a_width(int unsigned data_w);
    return data_w + 1;
  endfunction

  // Width of a product a_i * s_i (Q.1).
  function automatic int unsigned p_width(int unsigned data_w, int unsigned coef_w);
    return a_width(data_w) + s_width(coef_w);
  endfunction

  // Width of a three-input sum of products (Q.1).
  function automatic int unsigned z_width(int unsigned data_w, int unsigned coef_w);
    return p_width(data_w, coef_w) + 2;
  endfunction

  // Width of an integer output y (the Q.1 sum with its fractional bit dropped).
  function automatic int unsigned y_width(int unsigned data_w, int unsigned coef_w);
    return z_width(data_w, coef_w) - 1;
  endfunction

endpackage
