// tb_wino_module: end-to-end test of the Winograd F(2,3) processing module
// at its default widths.
//
// Reference: the direct form y0 = x0*h0+x1*h1+x2*h2, y1 = x1*h0+x2*h1+x3*h2
// in 64-bit integers, which shares nothing with the four-multiplier
// structure under test. The test
//   1. checks that reset clears the weights (y = 0 for any tile);
//   2. loads taps through the folding path (h_load) and checks random tiles,
//      including the extreme sample and tap values;
//   3. checks the write timing: new taps on h's pins change nothing until the
//      clock edge that loads them;
//   4. writes weights one at a time (s_we) as 2*s computed here, and checks;
//   5. writes odd Q.1 weights, for which the exact result has a half, and
//      checks y (floor) and y_half against the Q.1 sum computed here;
//   6. runs a 1-D convolution of a 130-sample stream with a 3-tap filter as
//      64 overlapping tiles with a stride of two, and checks all 128 outputs.
// Every mechanism (h_load, s_we, half result, streamed tiles) is counted and
// a failure is counted for any that never happened. One tile is presented
// per clock, as the combinational datapath allows.
module tb_wino_module;
  import wino_pkg::*;
  localparam int unsigned DATA_W = DATA_W_DEF;
  localparam int unsigned COEF_W = COEF_W_DEF;
  localparam int unsigned S_W    = s_width(COEF_W);
  localparam int unsigned Y_W    = y_width(DATA_W, COEF_W);
  localparam int STREAM_LEN      = 130;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                     rst_n, h_load, s_we;
  logic signed [COEF_W-1:0] h [N_TAP];
  logic [1:0]               s_addr;
  logic signed [S_W-1:0]    s_wdata;
  logic signed [DATA_W-1:0] x [N_IN];
  logic signed [Y_W-1:0]    y [N_OUT];
  logic [N_OUT-1:0]         y_half;

  wino_module dut (
    .clk(clk), .rst_n(rst_n), .h_load(h_load), .h(h),
    .s_we(s_we), .s_addr(s_addr), .s_wdata(s_wdata),
    .x(x), .y(y), .y_half(y_half)
  );

  int checks = 0, failures = 0;
  int n_hload = 0, n_swe = 0, n_half = 0, n_stream = 0;
  longint taps [N_TAP];  // taps currently in effect (direct-form reference)

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic signed [DATA_W-1:0] XMAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam logic signed [DATA_W-1:0] XMIN = {1'b1, {(DATA_W-1){1'b0}}};
  localparam logic signed [COEF_W-1:0] HMAX = {1'b0, {(COEF_W-1){1'b1}}};
  localparam logic signed [COEF_W-1:0] HMIN = {1'b1, {(COEF_W-1){1'b0}}};

  function automatic longint direct(int k);
    longint acc = 0;
    for (int i = 0; i < N_TAP; i++) acc += longint'(x[i + k]) * taps[i];
    return acc;
  endfunction

  task automatic expect_y(longint e0, longint e1, logic [1:0] half, string what);
    longint e [N_OUT];
    e[0] = e0; e[1] = e1;
    #1;
    for (int k = 0; k < N_OUT; k++) begin
      checks++;
      if (longint'(y[k]) != e[k] || y_half[k] != half[k]) begin
        failures++;
        $display("FAIL %s: y%0d=%0d half=%0b expected %0d half=%0b",
                 what, k, y[k], y_half[k], e[k], half[k]);
      end
    end
  endtask

  task automatic check_tile(string what);
    expect_y(direct(0), direct(1), 2'b00, what);
  endtask

  task automatic rand_tile();
    for (int i = 0; i < N_IN; i++) x[i] = DATA_W'($urandom);
  endtask

  // Load taps through the folding path; they apply after the clock edge.
  task automatic load_taps(longint t0, longint t1, longint t2);
    h[0] = COEF_W'(t0); h[1] = COEF_W'(t1); h[2] = COEF_W'(t2);
    h_load = 1'b1;
    @(posedge clk);
    #1 h_load = 1'b0;
    for (int i = 0; i < N_TAP; i++) taps[i] = longint'(h[i]);
    n_hload++;
  endtask

  task automatic write_s(int addr, longint q1);
    s_addr = 2'(addr); s_wdata = S_W'(q1); s_we = 1'b1;
    @(posedge clk);
    #1 s_we = 1'b0;
    n_swe++;
  endtask

  longint qs [N_MUL];
  longint stream_x [STREAM_LEN];

  initial begin
    rst_n = 1'b0; h_load = 1'b0; s_we = 1'b0; s_addr = '0; s_wdata = '0;
    for (int i = 0; i < N_TAP; i++) h[i] = '0;
    rand_tile();
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. weights cleared by reset
    for (int i = 0; i < N_TAP; i++) taps[i] = 0;
    for (int n = 0; n < 4; n++) begin rand_tile(); check_tile("reset"); end

    // 2. folded taps, random and extreme
    load_taps(longint'(HMAX), longint'(HMAX), longint'(HMAX));
    x[0] = XMAX; x[1] = XMAX; x[2] = XMAX; x[3] = XMAX; check_tile("ext1");
    x[0] = XMIN; x[1] = XMIN; x[2] = XMIN; x[3] = XMIN; check_tile("ext2");
    load_taps(longint'(HMIN), longint'(HMIN), longint'(HMIN));
    check_tile("ext3");
    x[0] = XMAX; x[1] = XMIN; x[2] = XMAX; x[3] = XMIN; check_tile("ext4");
    load_taps(longint'(HMIN), longint'(HMAX), longint'(HMIN));
    check_tile("ext5");
    x[0] = XMIN; x[1] = XMAX; x[2] = XMIN; x[3] = XMAX; check_tile("ext6");
    for (int r = 0; r < 50; r++) begin
      load_taps(longint'($signed(COEF_W'($urandom))), longint'($signed(COEF_W'($urandom))),
                longint'($signed(COEF_W'($urandom))));
      for (int n = 0; n < 20; n++) begin
        rand_tile(); check_tile("folded");
        @(posedge clk); #1;
      end
    end

    // 3. write timing: pins alone change nothing before the edge
    load_taps(3, -5, 7);
    rand_tile();
    h[0] = 100; h[1] = 200; h[2] = -300;
    check_tile("before edge");
    h_load = 1'b1;
    check_tile("load pending");
    @(posedge clk); #1 h_load = 1'b0;
    for (int i = 0; i < N_TAP; i++) taps[i] = longint'(h[i]);
    n_hload++;
    check_tile("after edge");

    // 4. weights written one by one as 2*s (Q.1)
    for (int r = 0; r < 20; r++) begin
      longint t0, t1, t2;
      t0 = longint'($signed(COEF_W'($urandom)));
      t1 = longint'($signed(COEF_W'($urandom)));
      t2 = longint'($signed(COEF_W'($urandom)));
      write_s(0, 2 * t0);
      write_s(1, t0 + t1 + t2);
      write_s(2, t0 - t1 + t2);
      write_s(3, 2 * t2);
      taps[0] = t0; taps[1] = t1; taps[2] = t2;
      for (int n = 0; n < 10; n++) begin rand_tile(); check_tile("written"); end
    end

    // 5. odd Q.1 weights: result carries a half, y is its floor
    for (int r = 0; r < 20; r++) begin
      for (int i = 0; i < N_MUL; i++) begin
        qs[i] = longint'($signed(S_W'($urandom)));
        write_s(i, qs[i]);
      end
      for (int n = 0; n < 10; n++) begin
        longint d [N_MUL];
        longint z0, z1;
        rand_tile();
        d[0] = longint'(x[0]) - longint'(x[2]);
        d[1] = longint'(x[1]) + longint'(x[2]);
        d[2] = longint'(x[2]) - longint'(x[1]);
        d[3] = longint'(x[1]) - longint'(x[3]);
        z0 = d[0] * qs[0] + d[1] * qs[1] + d[2] * qs[2];
        z1 = d[1] * qs[1] - d[2] * qs[2] - d[3] * qs[3];
        if ((z0 & 1) != 0 || (z1 & 1) != 0) n_half++;
        expect_y(z0 >>> 1, z1 >>> 1, {1'(z1 & 1), 1'(z0 & 1)}, "Q.1 weights");
      end
    end

    // 6. streamed 1-D convolution, one tile per clock, stride two
    load_taps(longint'($signed(COEF_W'($urandom))), longint'($signed(COEF_W'($urandom))),
              longint'($signed(COEF_W'($urandom))));
    for (int i = 0; i < STREAM_LEN; i++) stream_x[i] = longint'($signed(DATA_W'($urandom)));
    for (int l = 0; l + 3 < STREAM_LEN; l += 2) begin
      longint e0, e1;
      for (int i = 0; i < N_IN; i++) x[i] = DATA_W'(stream_x[l + i]);
      e0 = 0; e1 = 0;
      for (int i = 0; i < N_TAP; i++) begin
        e0 += stream_x[l + i] * taps[i];
        e1 += stream_x[l + 1 + i] * taps[i];
      end
      expect_y(e0, e1, 2'b00, "stream");
      n_stream++;
      @(posedge clk); #1;
    end

    $display("mechanisms: h_load=%0d s_we=%0d half=%0d stream_tiles=%0d",
             n_hload, n_swe, n_half, n_stream);
    checks++;
    if (n_hload == 0 || n_swe == 0 || n_half == 0 || n_stream != (STREAM_LEN - 2) / 2) begin
      failures++;
      $display("FAIL a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
