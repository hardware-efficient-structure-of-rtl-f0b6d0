// tb_multiplier_bank: self-checking test of the four multipliers.
// Each lane's product is compared with a 64-bit integer product, for the
// corner cases (most negative times most negative, max times min) and for
// random operands.
module tb_multiplier_bank;
  import wino_pkg::*;
  localparam int unsigned A_W = a_width(DATA_W_DEF);
  localparam int unsigned S_W = s_width(COEF_W_DEF);
  localparam int unsigned P_W = A_W + S_W;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [A_W-1:0] a [N_MUL];
  logic signed [S_W-1:0] s [N_MUL];
  logic signed [P_W-1:0] p [N_MUL];
  int checks = 0, failures = 0;

  multiplier_bank dut (.a(a), .s(s), .p(p));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    #1;
    for (int i = 0; i < N_MUL; i++) begin
      longint e;
      e = longint'(a[i]) * longint'(s[i]);
      checks++;
      if (longint'(p[i]) != e) begin
        failures++;
        $display("FAIL lane %0d: %0d * %0d = %0d expected %0d", i, a[i], s[i], p[i], e);
      end
    end
  endtask

  localparam logic signed [A_W-1:0] AMAX = {1'b0, {(A_W-1){1'b1}}};
  localparam logic signed [A_W-1:0] AMIN = {1'b1, {(A_W-1){1'b0}}};
  localparam logic signed [S_W-1:0] SMAX = {1'b0, {(S_W-1){1'b1}}};
  localparam logic signed [S_W-1:0] SMIN = {1'b1, {(S_W-1){1'b0}}};

  initial begin
    a[0] = AMIN; s[0] = SMIN;
    a[1] = AMAX; s[1] = SMIN;
    a[2] = AMIN; s[2] = SMAX;
    a[3] = AMAX; s[3] = SMAX;
    check_one();
    for (int n = 0; n < 2000; n++) begin
      for (int j = 0; j < N_MUL; j++) begin
        a[j] = A_W'($urandom);
        s[j] = S_W'($urandom);
      end
      check_one();
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
