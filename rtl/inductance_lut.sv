// inductance_lut: operating condition and inductance look-up table.
//
// The coupling inductances Lp, Ls1, Ls2, M1, M2 vary with the position x of
// the receiver coils along the track. The host loads N_PTS samples of each
// (one every dx metres, from finite-element analysis) into the table
// (CFG_LUT: addr[15:8] point, addr[2:0] inductance). The position is either
//   predefined (REG_POS_MODE = 0): pos += REG_VEL_STEP on every full step,
//     i.e. constant train speed, starting from REG_POS_INIT; or
//   external  (REG_POS_MODE = 1): pos follows the pos_ext input.
// The output is linearly interpolated between the two neighbouring samples:
//   s = pos * REG_INV_DX,  i = floor(s),  f = s - i,
//   L = T[i] + f * (T[i+1] - T[i]),
// clamped to the first and last sample outside the table. The two position
// sources follow the paper; interpolation and clamping are this design's.
//
// Timing: pos updates on the cycle after step (or every cycle in external
// mode); ind follows pos one cycle later. Reset: position 0, table and
// registers cleared (inv_dx = 0 reads point 0 everywhere).
module inductance_lut
  import imex_pkg::*;
#(
  parameter int unsigned N_PTS = 26
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    step,
  input  fx_t     pos_ext,
  output fx_t     pos,
  output logic    pos_mode,
  output fx_t     ind [N_IND]
);

  localparam int unsigned PW = $clog2(N_PTS);

  fx_t tbl [N_PTS][N_IND];
  fx_t inv_dx, vel_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_PTS; p++)
        for (int k = 0; k < N_IND; k++) tbl[p][k] <= '0;
      inv_dx   <= '0;
      vel_step <= '0;
      pos_mode <= 1'b0;
      pos      <= '0;
    end else begin
      if (pos_mode) pos <= pos_ext;
      else if (step) pos <= fx_add(pos, vel_step);
      if (cfg.we && cfg.addr[31:28] == CFG_LUT && cfg.addr[15:8] < N_PTS && cfg.addr[2:0] < N_IND)
        tbl[cfg.addr[8 +: PW]][cfg.addr[2:0]] <= fx_t'(cfg.data);
      if (cfg.we && cfg.addr[31:28] == CFG_REG) begin
        case (reg_e'(cfg.addr[7:0]))
          REG_INV_DX:   inv_dx   <= fx_t'(cfg.data);
          REG_POS_MODE: pos_mode <= cfg.data[0];
          REG_VEL_STEP: vel_step <= fx_t'(cfg.data);
          REG_POS_INIT: pos      <= fx_t'(cfg.data);
          default: ;
        endcase
      end
    end
  end

  // index and fraction
  fx_t          s;
  logic [PW-1:0] idx;
  fx_t          frac;
  always_comb begin
    s = fx_mul(pos, inv_dx);
    if (s < 0) begin
      idx  = '0;
      frac = '0;
    end else if (s[FW-1:FB] >= 24'(N_PTS - 1)) begin
      idx  = PW'(N_PTS - 2);
      frac = FX_ONE;
    end else begin
      idx  = s[FB +: PW];
      frac = fx_t'({24'd0, s[FB-1:0]});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_IND; k++) ind[k] <= '0;
    end else begin
      for (int k = 0; k < N_IND; k++)
        ind[k] <= fx_add(tbl[idx][k], fx_mul(frac, fx_add(tbl[idx+1][k], -tbl[idx][k])));
    end
  end

endmodule
