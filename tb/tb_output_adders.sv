// tb_output_adders: self-checking test of the two three-input adders.
// Compares z0 with p0+p1+p2 and z1 with p1-p2-p3, computed in 64-bit
// integers, for extreme and random signed products.
module tb_output_adders;
  import wino_pkg::*;
  localparam int unsigned P_W = p_width(DATA_W_DEF, COEF_W_DEF);
  localparam int unsigned Z_W = P_W + 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [P_W-1:0] p [N_MUL];
  logic signed [Z_W-1:0] z [N_OUT];
  int checks = 0, failures = 0;

  output_adders dut (.p(p), .z(z));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [P_W-1:0] rnd_p();
    return P_W'({$urandom, $urandom});
  endfunction

  task automatic check_one();
    longint e [N_OUT];
    e[0] = longint'(p[0]) + longint'(p[1]) + longint'(p[2]);
    e[1] = longint'(p[1]) - longint'(p[2]) - longint'(p[3]);
    #1;
    for (int k = 0; k < N_OUT; k++) begin
      checks++;
      if (longint'(z[k]) != e[k]) begin
        failures++;
        $display("FAIL z%0d=%0d expected %0d", k, z[k], e[k]);
      end
    end
  endtask

  localparam logic signed [P_W-1:0] PMAX = {1'b0, {(P_W-1){1'b1}}};
  localparam logic signed [P_W-1:0] PMIN = {1'b1, {(P_W-1){1'b0}}};

  initial begin
    p[0] = PMAX; p[1] = PMAX; p[2] = PMAX; p[3] = PMAX; check_one();
    p[0] = PMIN; p[1] = PMIN; p[2] = PMAX; p[3] = PMAX; check_one();
    p[0] = PMIN; p[1] = PMAX; p[2] = PMIN; p[3] = PMIN; check_one();
    for (int n = 0; n < 2000; n++) begin
      for (int j = 0; j < N_MUL; j++) p[j] = rnd_p();
      check_one();
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
