// coef_precompute: folds the three taps of the FIR filter into the four
// multiplier weights of the Winograd F(2,3) module,
//   s0 = h0,  s1 = (h0 + h1 + h2)/2,  s2 = (h0 - h1 + h2)/2,  s3 = h2.
//
// It follows the paper's factorisation S = D4 * A2 * A1 * H literally, as
// three layers:
//   A1 (5x3):  t = [h0, h1, h0+h2, -h1, h2]     (one adder, one negation)
//   A2 (4x5):  u = [t0, t1+t2, t2+t3, t4]       (two adders)
//   D4      :  s = [u0, u1/2, u2/2, u3]
// The multiplications by 1/2 cost nothing: every weight is produced in signed
// fixed point with one fractional bit (Q.1), so s = u/2 is u itself read with
// the binary point one place to the left, and s0, s3 are u0, u3 shifted left
// once. No rounding ever occurs. The Q.1 format is this design's choice; the
// paper gives the weights as real numbers.
//
// s0 and s3 need no logic at all: they are h0 and h2 rewired one bit up, with
// a constant zero fractional bit. Only s1 and s2 cost adders (three in all,
// with h0+h2 shared), which is the paper's data flow for this step.
//
// Interface: h[0..2] signed COEF_W-bit taps in; s[0..3] signed Q.1 weights
// out, S_W = COEF_W+2 bits. Purely combinational.
module coef_precompute
  import wino_pkg::*;
#(
  parameter int unsigned COEF_W = COEF_W_DEF,
  localparam int unsigned S_W   = s_width(COEF_W)
) (
  input  logic signed [COEF_W-1:0] h [N_TAP],
  output logic signed [S_W-1:0]    s [N_MUL]
);

  // Layer values are integers; h0+h1+h2 needs two bits of growth, S_W.
  localparam int unsigned U_W = S_W;

  logic signed [U_W-1:0] t [5];
  logic signed [U_W-1:0] u [N_MUL];

  always_comb begin
    // A1: fan-out, one addition, one sign change
    t[0] = U_W'(h[0]);
    t[1] = U_W'(h[1]);
    t[2] = U_W'(h[0]) + U_W'(h[2]);
    t[3] = -U_W'(h[1]);
    t[4] = U_W'(h[2]);
    // A2: two additions
    u[0] = t[0];
    u[1] = t[1] + t[2];
    u[2] = t[2] + t[3];
    u[3] = t[4];
    // D4 = diag(1, 1/2, 1/2, 1), expressed in Q.1
    s[0] = u[0] <<< 1;
    s[1] = u[1];
    s[2] = u[2];
    s[3] = u[3] <<< 1;
  end

endmodule
