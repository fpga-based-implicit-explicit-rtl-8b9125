// coef_mem: per-topology coefficient store of the PWL part.
//
// For every topology k the host precomputes and writes three matrices over
// the vector v = [x_l; u_l; y_nl] (NV = N_XL + N_U + N_Y columns):
//   P1 (N_XL rows): stage-1 implicit half step, eq. (7): x_l(n+1/2) = P1 v,
//                   P1 = (I - h/2 A_k)^-1 [I  B_k]   (host folds any factor)
//   P2 (N_XL rows): stage-2 explicit midpoint step, eq. (9):
//                   x_l(n+1) = x_l(n) + P2 v(n+1/2),  P2 = h [A_k  B_k]
//   CD (N_Y rows):  output equation, eq. (5): y_l = [C_k  D_k] v
// Writes use the CFG_COEF region: addr[27:20] topology, [19:18] set
// (coef_set_e), [17:12] row, [11:6] column.
//
// The MVM reads a whole matrix at once, so the store is built from registers.
// On a cycle with load high, mat is loaded one cycle later with the step
// matrix of the requested stage (P1 when stage2 is 0, else P2) in rows
// 0..N_XL-1 followed by CD in rows N_XL..N_XL+N_Y-1. Reset clears all
// coefficients. The per-topology store is this design's choice; how the
// matrices are derived is left to the host.
module coef_mem
  import imex_pkg::*;
#(
  parameter int unsigned N_TOPO = 16,
  parameter int unsigned N_XL   = 12,
  parameter int unsigned N_Y    = 3,
  parameter int unsigned NV     = 16,
  localparam int unsigned TW    = (N_TOPO > 1) ? $clog2(N_TOPO) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_wr_t       cfg,
  input  logic          load,
  input  logic [TW-1:0] topo,
  input  logic          stage2,
  output fx_t           mat [N_XL+N_Y][NV]
);

  fx_t step_q [N_TOPO][2][N_XL][NV];
  fx_t cd_q   [N_TOPO][N_Y][NV];

  logic [7:0] w_topo;
  logic [1:0] w_set;
  logic [5:0] w_row, w_col;
  assign w_topo = cfg.addr[27:20];
  assign w_set  = cfg.addr[19:18];
  assign w_row  = cfg.addr[17:12];
  assign w_col  = cfg.addr[11:6];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < N_TOPO; t++) begin
        for (int r = 0; r < N_XL; r++)
          for (int c = 0; c < NV; c++) begin
            step_q[t][0][r][c] <= '0;
            step_q[t][1][r][c] <= '0;
          end
        for (int r = 0; r < N_Y; r++)
          for (int c = 0; c < NV; c++) cd_q[t][r][c] <= '0;
      end
    end else if (cfg.we && cfg.addr[31:28] == CFG_COEF && w_topo < N_TOPO && w_col < NV) begin
      if ((w_set == SET_P1 || w_set == SET_P2) && w_row < N_XL)
        step_q[w_topo[TW-1:0]][w_set[0]][w_row][w_col[$clog2(NV)-1:0]] <= fx_t'(cfg.data);
      else if (w_set == SET_CD && w_row < N_Y)
        cd_q[w_topo[TW-1:0]][w_row][w_col[$clog2(NV)-1:0]] <= fx_t'(cfg.data);
    end
  end

  always_ff @(posedge clk) begin
    if (load) begin
      for (int r = 0; r < N_XL; r++)
        for (int c = 0; c < NV; c++) mat[r][c] <= step_q[topo][stage2][r][c];
      for (int r = 0; r < N_Y; r++)
        for (int c = 0; c < NV; c++) mat[N_XL+r][c] <= cd_q[topo][r][c];
    end
  end

endmodule
