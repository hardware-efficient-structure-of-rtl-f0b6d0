// tb_coef_precompute: self-checking test of the tap folding.
// Drives random and extreme signed taps and compares each Q.1 weight with
// 2*s computed here from the closed formulas s0=h0, s1=(h0+h1+h2)/2,
// s2=(h0-h1+h2)/2, s3=h2 in 64-bit integers.
module tb_coef_precompute;
  import wino_pkg::*;
  localparam int unsigned COEF_W = COEF_W_DEF;
  localparam int unsigned S_W    = s_width(COEF_W);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [COEF_W-1:0] h [N_TAP];
  logic signed [S_W-1:0]    s [N_MUL];
  int checks = 0, failures = 0;

  coef_precompute dut (.h(h), .s(s));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    longint h0, h1, h2;
    longint exp2s [N_MUL];
    h0 = longint'(h[0]); h1 = longint'(h[1]); h2 = longint'(h[2]);
    exp2s[0] = 2 * h0;
    exp2s[1] = h0 + h1 + h2;
    exp2s[2] = h0 - h1 + h2;
    exp2s[3] = 2 * h2;
    #1;
    for (int i = 0; i < N_MUL; i++) begin
      checks++;
      if (longint'(s[i]) != exp2s[i]) begin
        failures++;
        $display("FAIL h=(%0d,%0d,%0d) s%0d=%0d expected %0d", h0, h1, h2, i, s[i], exp2s[i]);
      end
    end
  endtask

  localparam logic signed [COEF_W-1:0] HMAX = {1'b0, {(COEF_W-1){1'b1}}};
  localparam logic signed [COEF_W-1:0] HMIN = {1'b1, {(COEF_W-1){1'b0}}};

  initial begin
    // extremes: all-max, all-min, mixed signs
    h[0] = HMAX; h[1] = HMAX; h[2] = HMAX; check_one();
    h[0] = HMIN; h[1] = HMIN; h[2] = HMIN; check_one();
    h[0] = HMAX; h[1] = HMIN; h[2] = HMAX; check_one();
    h[0] = HMIN; h[1] = HMAX; h[2] = HMIN; check_one();
    h[0] = 1;    h[1] = 0;    h[2] = 0;    check_one();
    h[0] = 0;    h[1] = 1;    h[2] = 0;    check_one();
    h[0] = 0;    h[1] = 0;    h[2] = 1;    check_one();
    for (int n = 0; n < 2000; n++) begin
      for (int j = 0; j < N_TAP; j++) h[j] = COEF_W'($urandom);
      check_one();
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
