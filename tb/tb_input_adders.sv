// tb_input_adders: self-checking test of the four pre-adders.
// Compares a0..a3 with x0-x2, x1+x2, x2-x1, x1-x3 computed in 64-bit
// integers, for extreme and random signed samples.
module tb_input_adders;
  import wino_pkg::*;
  localparam int unsigned DATA_W = DATA_W_DEF;
  localparam int unsigned A_W    = a_width(DATA_W);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [DATA_W-1:0] x [N_IN];
  logic signed [A_W-1:0]    a [N_MUL];
  int checks = 0, failures = 0;

  input_adders dut (.x(x), .a(a));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    longint v [N_IN];
    longint e [N_MUL];
    for (int i = 0; i < N_IN; i++) v[i] = longint'(x[i]);
    e[0] = v[0] - v[2];
    e[1] = v[1] + v[2];
    e[2] = v[2] - v[1];
    e[3] = v[1] - v[3];
    #1;
    for (int i = 0; i < N_MUL; i++) begin
      checks++;
      if (longint'(a[i]) != e[i]) begin
        failures++;
        $display("FAIL x=(%0d,%0d,%0d,%0d) a%0d=%0d expected %0d",
                 v[0], v[1], v[2], v[3], i, a[i], e[i]);
      end
    end
  endtask

  localparam logic signed [DATA_W-1:0] XMAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam logic signed [DATA_W-1:0] XMIN = {1'b1, {(DATA_W-1){1'b0}}};

  initial begin
    x[0] = XMAX; x[1] = XMIN; x[2] = XMIN; x[3] = XMAX; check_one();
    x[0] = XMIN; x[1] = XMAX; x[2] = XMAX; x[3] = XMIN; check_one();
    x[0] = XMIN; x[1] = XMIN; x[2] = XMIN; x[3] = XMIN; check_one();
    for (int n = 0; n < 2000; n++) begin
      for (int j = 0; j < N_IN; j++) x[j] = DATA_W'($urandom);
      check_one();
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
