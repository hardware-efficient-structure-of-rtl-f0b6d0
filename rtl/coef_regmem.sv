// coef_regmem: the register memory of the processing module that holds the
// four weights s0..s3. The weights are written before a run of calculations
// and then read by the four multipliers in parallel, every cycle.
//
// The paper says only that the weights are precomputed and written to this
// memory beforehand. The write ports are this design's choice:
//   load        - writes all four entries at once from s_load (used with the
//                 on-chip coefficient folding of coef_precompute);
//   we/waddr    - writes one entry from wdata (a host that folds the taps
//                 itself). If load and we coincide, load wins.
// Both take effect at the rising clock edge; s_q shows the new value from the
// next cycle on. An active-low synchronous reset clears all entries to zero.
module coef_regmem
  import wino_pkg::*;
#(
  parameter int unsigned S_W = s_width(COEF_W_DEF)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic signed [S_W-1:0] s_load [N_MUL],
  input  logic                 we,
  input  logic [1:0]           waddr,
  input  logic signed [S_W-1:0] wdata,
  output logic signed [S_W-1:0] s_q    [N_MUL]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_MUL; i++) s_q[i] <= '0;
    end else if (load) begin
      for (int i = 0; i < N_MUL; i++) s_q[i] <= s_load[i];
    end else if (we) begin
      s_q[waddr] <= wdata;
    end
  end

endmodule
