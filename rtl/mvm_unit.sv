// mvm_unit: fully parallel matrix-vector multiplier (res = mat * vec).
//
// One dot-product unit per matrix row, all rows working at once on the same
// vector, as in the solver's MVM unit. Every element product is formed in
// parallel (M*N Q24.40 multipliers); the products are registered, then each
// row's products are summed by an adder tree whose result is registered.
//
// Interface: mat[r][c] and vec[c] are sampled on the cycle start is high.
// Timing: res is valid, and done pulses, two cycles after start. A new start
// may be given every cycle (fully pipelined). The row-parallel structure
// follows the paper; the two-stage pipeline, truncating products and
// saturating sums are this design's choices.
module mvm_unit
  import imex_pkg::*;
#(
  parameter int unsigned M = 15,  // rows
  parameter int unsigned N = 16   // columns
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  mat [M][N],
  input  fx_t  vec [N],
  output fx_t  res [M],
  output logic done
);

  fx_t  prod_q [M][N];
  logic p_vld;

  // stage 1: element products
  always_ff @(posedge clk) begin
    if (start) begin
      for (int r = 0; r < M; r++)
        for (int c = 0; c < N; c++)
          prod_q[r][c] <= fx_mul(mat[r][c], vec[c]);
    end
  end

  // stage 2: row sums (dot products), 128-bit accumulation then saturation
  always_ff @(posedge clk) begin
    if (p_vld) begin
      for (int r = 0; r < M; r++) begin
        logic signed [127:0] acc;
        acc = '0;
        for (int c = 0; c < N; c++) acc += 128'(prod_q[r][c]);
        res[r] <= fx_sat(acc);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_vld <= 1'b0;
      done  <= 1'b0;
    end else begin
      p_vld <= start;
      done  <= p_vld;
    end
  end

endmodule
