// pwl_part: the piecewise-linear (power electronics) part of the IMEX solver.
//
// State: x_l, the N_XL capacitor voltages and inductor currents. With
// v = [x_l; u_l; y_nl] (NV entries) one MVM pass computes, for the topology
// selected in coef_mem, both
//   the output equation, eq. (5):  y_l = [C_k D_k] v   (rows N_XL..N_XL+2)
//   the time step (rows 0..N_XL-1):
//     stage 1, eq. (7), implicit:         x_l(n+1/2) = P1 v(n)
//     stage 2, eq. (9), explicit midpoint: x_l(n+1)  = x_l(n) + P2 v(n+1/2)
// The stage-1 start value x_l(n) is kept in a base register for eq. (9).
// Sharing one MVM between output and step rows, and switching the step
// coefficients by the stage flag, is this design's form of the paper's
// stage-flag switch between the eq. (7) and eq. (9) units.
//
// Interface and timing: start samples mat, u and y_nl and the present x_l;
// three cycles later x_l and y_l are updated and done pulses. Reset clears
// the state (the circuit starts from rest).
module pwl_part
  import imex_pkg::*;
#(
  parameter int unsigned N_XL = 12,
  parameter int unsigned N_U  = 1,
  localparam int unsigned N_Y = 3,
  localparam int unsigned NV  = N_XL + N_U + N_Y,
  localparam int unsigned NR  = N_XL + N_Y
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic stage2,
  input  fx_t  mat  [NR][NV],
  input  fx_t  u    [N_U],
  input  fx_t  y_nl [N_Y],
  output fx_t  x_l  [N_XL],
  output fx_t  y_l  [N_Y],
  output logic done
);

  fx_t  vec [NV];
  fx_t  res [NR];
  fx_t  base [N_XL];
  logic mvm_done;
  logic stage2_q;

  always_comb begin
    for (int i = 0; i < N_XL; i++) vec[i] = x_l[i];
    for (int i = 0; i < N_U; i++)  vec[N_XL+i] = u[i];
    for (int i = 0; i < N_Y; i++)  vec[N_XL+N_U+i] = y_nl[i];
  end

  mvm_unit #(.M(NR), .N(NV)) u_mvm (
    .clk  (clk),
    .rst_n(rst_n),
    .start(start),
    .mat  (mat),
    .vec  (vec),
    .res  (res),
    .done (mvm_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_XL; i++) begin
        x_l[i]  <= '0;
        base[i] <= '0;
      end
      for (int i = 0; i < N_Y; i++) y_l[i] <= '0;
      stage2_q <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) stage2_q <= stage2;
      if (mvm_done) begin
        for (int i = 0; i < N_XL; i++) begin
          if (!stage2_q) begin
            base[i] <= x_l[i];
            x_l[i]  <= res[i];
          end else begin
            x_l[i]  <= fx_add(base[i], res[i]);
          end
        end
        for (int i = 0; i < N_Y; i++) y_l[i] <= res[N_XL+i];
        done <= 1'b1;
      end
    end
  end

endmodule
