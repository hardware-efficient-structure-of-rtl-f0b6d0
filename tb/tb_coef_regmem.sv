// tb_coef_regmem: self-checking test of the weight register memory.
// Checks reset to zero, parallel load, single-entry writes, load priority
// over a simultaneous write, and that values hold while nothing is written.
// A shadow model kept in this testbench gives the expected contents, and
// every entry is compared after every clock edge.
module tb_coef_regmem;
  import wino_pkg::*;
  localparam int unsigned S_W = s_width(COEF_W_DEF);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                  rst_n, load, we;
  logic [1:0]            waddr;
  logic signed [S_W-1:0] s_load [N_MUL];
  logic signed [S_W-1:0] wdata;
  logic signed [S_W-1:0] s_q    [N_MUL];
  logic signed [S_W-1:0] model  [N_MUL];
  int checks = 0, failures = 0;
  int n_load = 0, n_write = 0, n_both = 0;

  coef_regmem dut (
    .clk(clk), .rst_n(rst_n), .load(load), .s_load(s_load),
    .we(we), .waddr(waddr), .wdata(wdata), .s_q(s_q)
  );

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int i = 0; i < N_MUL; i++) begin
      checks++;
      if (s_q[i] !== model[i]) begin
        failures++;
        $display("FAIL %s entry %0d = %0d expected %0d", what, i, s_q[i], model[i]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; load = 1'b0; we = 1'b0; waddr = '0; wdata = '0;
    for (int i = 0; i < N_MUL; i++) s_load[i] = S_W'($urandom);
    @(posedge clk); @(posedge clk); #1;
    for (int i = 0; i < N_MUL; i++) model[i] = '0;
    compare("reset");
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      load  = ($urandom % 4) == 0;
      we    = ($urandom % 2) == 0;
      waddr = 2'($urandom);
      wdata = S_W'($urandom);
      for (int i = 0; i < N_MUL; i++) s_load[i] = S_W'($urandom);
      @(posedge clk);
      if (load) begin
        for (int i = 0; i < N_MUL; i++) model[i] = s_load[i];
        n_load++;
        if (we) n_both++;
      end else if (we) begin
        model[waddr] = wdata;
        n_write++;
      end
      #1;
      compare("run");
    end
    checks++;
    if (n_load == 0 || n_write == 0 || n_both == 0) begin
      failures++;
      $display("FAIL coverage load=%0d write=%0d both=%0d", n_load, n_write, n_both);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
