// multiplier_bank: the four multipliers of the Winograd F(2,3) module, the
// diag(S) layer of the algorithm. Lane i forms mu_i = a_i * s_i, a pre-added
// sample pair times a fixed weight from the register memory.
//
// Each multiplier is a full-precision signed multiply written as '*', left to
// synthesis to map (the paper counts multipliers, it does not design one).
// The weight is in Q.1, so the product is in Q.1 too.
//
// Interface: a[0..3] signed A_W bits, s[0..3] signed S_W bits in;
// p[0..3] signed A_W+S_W bits out. Purely combinational.
module multiplier_bank
  import wino_pkg::*;
#(
  parameter int unsigned A_W = a_width(DATA_W_DEF),
  parameter int unsigned S_W = s_width(COEF_W_DEF),
  localparam int unsigned P_W = A_W + S_W
) (
  input  logic signed [A_W-1:0] a [N_MUL],
  input  logic signed [S_W-1:0] s [N_MUL],
  output logic signed [P_W-1:0] p [N_MUL]
);

  always_comb begin
    for (int i = 0; i < N_MUL; i++) begin
      p[i] = P_W'(a[i]) * P_W'(s[i]);
    end
  end

endmodule
