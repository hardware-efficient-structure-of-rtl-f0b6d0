// wino_module: processing module for the basic operation of a convolutional
// layer, computed with Winograd's minimal filtering algorithm F(2,3).
//
// For a tile of four consecutive samples x0..x3 and a 3-tap filter h0..h2 it
// delivers the two outputs of the sliding inner product
//   y0 = x0*h0 + x1*h1 + x2*h2,   y1 = x1*h0 + x2*h1 + x3*h2
// with four multipliers and eight additions instead of six multipliers:
//   y = A2 * diag(S) * A1 * x
// where A1 is the layer of four two-input adders (input_adders), diag(S) the
// four multipliers (multiplier_bank) with weights s0..s3 read from a register
// memory (coef_regmem), and A2 the two three-input adders (output_adders).
// This is the structure the paper draws for an ASIC.
//
// Weights: the paper assumes s0..s3 are computed in advance and written to
// the register memory. Both routes are offered:
//   h_load        - the taps h[0..2] pass through coef_precompute (the
//                   S = D4*A2*A1*H folding) and all four weights are loaded
//                   in one clock;
//   s_we          - one weight s_wdata (signed Q.1, i.e. the bit pattern is
//                   2*s) is written at s_addr.
// Writes take effect at the rising edge of clk; the weights are reset to
// zero by the synchronous active-low rst_n.
//
// Datapath timing: x -> y is combinational, as in the paper's diagram; no
// pipeline registers are added (the paper places none). A new tile may be
// presented on every cycle once the weights are loaded.
//
// Number format: the weights carry one fractional bit so that the two
// halvings are exact. The datapath keeps that bit to the end; y is the
// Q.1 result with its fractional bit dropped (floor), and y_half reports
// that bit. With weights folded from integer taps y_half is always zero and
// y is exact; only hand-written weights with odd Q.1 patterns can make it one.
module wino_module
  import wino_pkg::*;
#(
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned COEF_W = COEF_W_DEF,
  localparam int unsigned S_W   = s_width(COEF_W),
  localparam int unsigned A_W   = a_width(DATA_W),
  localparam int unsigned P_W   = p_width(DATA_W, COEF_W),
  localparam int unsigned Z_W   = z_width(DATA_W, COEF_W),
  localparam int unsigned Y_W   = y_width(DATA_W, COEF_W)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight loading
  input  logic                     h_load,
  input  logic signed [COEF_W-1:0] h       [N_TAP],
  input  logic                     s_we,
  input  logic [1:0]               s_addr,
  input  logic signed [S_W-1:0]    s_wdata,
  // data tile and results
  input  logic signed [DATA_W-1:0] x       [N_IN],
  output logic signed [Y_W-1:0]    y       [N_OUT],
  output logic [N_OUT-1:0]         y_half
);

  logic signed [S_W-1:0] s_fold [N_MUL];
  logic signed [S_W-1:0] s_q    [N_MUL];
  logic signed [A_W-1:0] a      [N_MUL];
  logic signed [P_W-1:0] p      [N_MUL];
  logic signed [Z_W-1:0] z      [N_OUT];

  coef_precompute #(.COEF_W(COEF_W)) u_fold (
    .h (h),
    .s (s_fold)
  );

  coef_regmem #(.S_W(S_W)) u_smem (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (h_load),
    .s_load (s_fold),
    .we     (s_we),
    .waddr  (s_addr),
    .wdata  (s_wdata),
    .s_q    (s_q)
  );

  input_adders #(.DATA_W(DATA_W)) u_pre (
    .x (x),
    .a (a)
  );

  multiplier_bank #(.A_W(A_W), .S_W(S_W)) u_mul (
    .a (a),
    .s (s_q),
    .p (p)
  );

  output_adders #(.P_W(P_W)) u_post (
    .p (p),
    .z (z)
  );

  always_comb begin
    for (int k = 0; k < N_OUT; k++) begin
      y[k]      = z[k][Z_W-1:1];
      y_half[k] = z[k][0];
    end
  end

  // Weights folded from integer taps must give integer outputs.
  logic folded;
  always_ff @(posedge clk) begin
    if (!rst_n)      folded <= 1'b1;
    else if (h_load) folded <= 1'b1;
    else if (s_we)   folded <= 1'b0;
  end

  always_comb begin
    if (rst_n && folded) assert (y_half == '0) else $error("odd Q.1 result with folded weights");
  end

endmodule
