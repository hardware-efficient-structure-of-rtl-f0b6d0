// output_adders: the post-addition layer A2 of the Winograd F(2,3) module,
// two three-input algebraic adders combining the four products:
//   z0 = mu1 + mu2 + mu3,  z1 = mu2 - mu3 - mu4
// (paper numbering mu1..mu4; here p[0]..p[3]).
//
// Interface: p[0..3] signed P_W bits in (Q.1); z[0..1] signed P_W+2 bits out,
// still in Q.1, wide enough that no sum can overflow. Purely combinational.
module output_adders
  import wino_pkg::*;
#(
  parameter int unsigned P_W  = p_width(DATA_W_DEF, COEF_W_DEF),
  localparam int unsigned Z_W = P_W + 2
) (
  input  logic signed [P_W-1:0] p [N_MUL],
  output logic signed [Z_W-1:0] z [N_OUT]
);

  always_comb begin
    z[0] = Z_W'(p[0]) + Z_W'(p[1]) + Z_W'(p[2]);
    z[1] = Z_W'(p[1]) - Z_W'(p[2]) - Z_W'(p[3]);
  end

endmodule
