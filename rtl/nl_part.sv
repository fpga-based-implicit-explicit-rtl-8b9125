// nl_part: the nonlinear (magnetic coupling) part of the IMEX solver.
//
// State: the three coil fluxes x_nl = [Psi_p; Psi_s1; Psi_s2]. The state
// equation is dx_nl/dt = y_l (the coil voltages supplied by the PWL part) and
// the output is y_nl = M^-1 x_nl (the coil currents, eq. (2)), with M^-1
// supplied by minv_unit. Both stages use explicit formulas:
//   stage 1, eq. (6): x_nl(n+1/2) = x_nl(n) + h/2 * y_l(n)
//   stage 2, eq. (8): x_nl(n+1)   = x_nl(n) + h   * y_l(n+1/2)
// The stage-1 start value x_nl(n) is kept in a base register for eq. (8).
//
// Interface and timing: out_start computes y_nl from the present fluxes on a
// 3x3 mvm_unit; y_nl is valid when out_done pulses, three cycles later. step
// (with stage2 giving the stage) applies the time step in one cycle using
// the y_l present on that cycle. g is sampled at out_start. Reset clears the
// fluxes and currents. The equations follow the paper; the two-register
// form of eq. (8) and the timing are this design's.
module nl_part
  import imex_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  fx_t  g [3][3],   // M^-1, row-major
  input  fx_t  y_l [3],    // interface voltages u1..u3
  input  fx_t  h_half,
  input  fx_t  h_full,
  input  logic out_start,
  output logic out_done,
  input  logic step,
  input  logic stage2,
  output fx_t  x_nl [3],
  output fx_t  y_nl [3]
);

  fx_t base [3];
  fx_t y_mvm [3];
  logic mvm_done;

  mvm_unit #(.M(3), .N(3)) u_out (
    .clk  (clk),
    .rst_n(rst_n),
    .start(out_start),
    .mat  (g),
    .vec  (x_nl),
    .res  (y_mvm),
    .done (mvm_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) begin
        x_nl[i] <= '0;
        base[i] <= '0;
        y_nl[i] <= '0;
      end
      out_done <= 1'b0;
    end else begin
      out_done <= 1'b0;
      if (mvm_done) begin
        y_nl     <= y_mvm;
        out_done <= 1'b1;
      end
      if (step) begin
        for (int i = 0; i < 3; i++) begin
          if (!stage2) begin
            base[i] <= x_nl[i];
            x_nl[i] <= fx_add(x_nl[i], fx_mul(h_half, y_l[i]));
          end else begin
            x_nl[i] <= fx_add(base[i], fx_mul(h_full, y_l[i]));
          end
        end
      end
    end
  end

endmodule
