// minv_unit: inverse inductance matrix M^-1 of the magnetic coupling part.
//
// The coil currents follow from the fluxes through y_nl = M^-1 x_nl, eq. (2).
// With the coupling inductances Lp, Ls1, Ls2, M1, M2, eq. (3) gives
//   M^-1 = adj / det,
//   det  = Ls2*M1^2 + Ls1*M2^2 - Lp*Ls1*Ls2
//   adj  = [ -Ls1*Ls2    Ls2*M1         Ls1*M2
//             Ls2*M1     M2^2-Lp*Ls2   -M1*M2
//             Ls1*M2    -M1*M2          M1^2-Lp*Ls1 ]
// The unit runs continuously: it captures the inductances and forms det and
// adj (1 cycle), computes 1/det with a restoring divider, one quotient bit
// per cycle over 101 bits (101 cycles), multiplies adj by 1/det and publishes
// all nine entries at once (1 cycle), pulsing g_valid. One update takes 103
// cycles, about 3.5 full solver steps at the default tick, while the
// position moves by micrometres per step. A zero determinant leaves g
// unchanged. The reciprocal carries GUARD = 20 extra fraction bits
// (Q24.60, kept in 64 bits), because with inductances of tens to hundreds
// of microhenry det is of order 1e6 and a Q24.40 reciprocal would keep only
// about 19 significant bits. |det| must stay above 2^-3 so that the
// reciprocal fits; smaller values saturate.
// The formula is the paper's; the sequential update is this design's.
//
// Units: with inductances in microhenry and fluxes in microweber the
// products stay well inside the 24 integer bits.
module minv_unit
  import imex_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  fx_t  ind [N_IND],
  output fx_t  g [3][3],
  output logic g_valid
);

  typedef enum logic [1:0] {S_CAP, S_DIV, S_OUT} state_e;
  state_e state;

  fx_t  adj [3][3];
  logic neg_q;
  logic [63:0] dabs;        // |det|
  localparam int unsigned GUARD = 20;
  localparam int unsigned QB    = 2 * FB + GUARD;  // dividend is 2^QB

  logic [64:0] rem;
  logic [QB:0] quo;
  logic [6:0]  bitn;

  fx_t lp, ls1, ls2, m1, m2;
  assign lp  = ind[IND_LP];
  assign ls1 = ind[IND_LS1];
  assign ls2 = ind[IND_LS2];
  assign m1  = ind[IND_M1];
  assign m2  = ind[IND_M2];

  fx_t recip;
  always_comb begin
    fx_t q;
    q = (|quo[QB:63]) ? FX_MAX : fx_t'({1'b0, quo[62:0]});
    recip = neg_q ? -q : q;
  end

  logic [64:0] rem_sh;
  assign rem_sh = {rem[63:0], (bitn == 7'(QB))};  // dividend is 2^QB

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_CAP;
      g_valid <= 1'b0;
      neg_q   <= 1'b0;
      dabs    <= '0;
      rem     <= '0;
      quo     <= '0;
      bitn    <= '0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          g[r][c]   <= '0;
          adj[r][c] <= '0;
        end
    end else begin
      g_valid <= 1'b0;
      case (state)
        S_CAP: begin
          fx_t d;
          d = fx_add(fx_add(fx_mul(ls2, fx_mul(m1, m1)), fx_mul(ls1, fx_mul(m2, m2))),
                     -fx_mul(lp, fx_mul(ls1, ls2)));
          adj[0][0] <= -fx_mul(ls1, ls2);
          adj[0][1] <= fx_mul(ls2, m1);
          adj[0][2] <= fx_mul(ls1, m2);
          adj[1][0] <= fx_mul(ls2, m1);
          adj[1][1] <= fx_add(fx_mul(m2, m2), -fx_mul(lp, ls2));
          adj[1][2] <= -fx_mul(m1, m2);
          adj[2][0] <= fx_mul(ls1, m2);
          adj[2][1] <= -fx_mul(m1, m2);
          adj[2][2] <= fx_add(fx_mul(m1, m1), -fx_mul(lp, ls1));
          neg_q <= d[FW-1];
          dabs  <= d[FW-1] ? 64'(-d) : 64'(d);
          rem   <= '0;
          quo   <= '0;
          bitn  <= 7'(QB);
          if (d != 0) state <= S_DIV;
        end
        S_DIV: begin
          if (rem_sh >= {1'b0, dabs}) begin
            rem       <= rem_sh - {1'b0, dabs};
            quo[bitn] <= 1'b1;
          end else begin
            rem <= rem_sh;
          end
          if (bitn == 0) state <= S_OUT;
          else bitn <= bitn - 1'b1;
        end
        default: begin  // S_OUT
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++) g[r][c] <= fx_sat((128'(adj[r][c]) * 128'(recip)) >>> (FB + GUARD));
          g_valid <= 1'b1;
          state   <= S_CAP;
        end
      endcase
    end
  end

endmodule
