// input_adders: the pre-addition layer A1 of the Winograd F(2,3) module, four
// two-input algebraic adders working on the input tile x0..x3:
//   a0 = x0 - x2,  a1 = x1 + x2,  a2 = x2 - x1,  a3 = x1 - x3.
// a_i is the operand of the multiplier with weight s_i.
//
// The printed formula for the fourth product reads (x1 - x2)*h2; the data
// flow graph and the module diagram both feed x1 and x3 into that adder, and
// only x1 - x3 gives the correct second output, so x1 - x3 is used here.
//
// Interface: x[0..3] signed DATA_W bits in; a[0..3] signed DATA_W+1 bits out
// (one bit of growth, so no overflow). Purely combinational.
module input_adders
  import wino_pkg::*;
#(
  parameter int unsigned DATA_W = DATA_W_DEF,
  localparam int unsigned A_W   = a_width(DATA_W)
) (
  input  logic signed [DATA_W-1:0] x [N_IN],
  output logic signed [A_W-1:0]    a [N_MUL]
);

  always_comb begin
    a[0] = A_W'(x[0]) - A_W'(x[2]);
    a[1] = A_W'(x[1]) + A_W'(x[2]);
    a[2] = A_W'(x[2]) - A_W'(x[1]);
    a[3] = A_W'(x[1]) - A_W'(x[3]);
  end

endmodule
