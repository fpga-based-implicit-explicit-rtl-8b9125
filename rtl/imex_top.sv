// imex_top: half-step implicit-explicit (IMEX) real-time solver for a
// railway wireless power transfer circuit with position-dependent coupling.
//
// The simulated circuit is split into a nonlinear part (the coupled coils,
// state x_nl = fluxes) and a piecewise-linear part (converters and resonant
// capacitors, state x_l). The two exchange interface variables every stage:
// the coil currents y_nl and the coil voltages y_l. Each real-time tick runs
// one stage, alternating
//   stage 1: NL explicit Euler half step, PWL implicit half step (eq. 6, 7)
//   stage 2: both explicit midpoint full step from t_n          (eq. 8, 9)
// so that the interface delay of latency-based methods is removed.
//
// Blocks: stage_ctrl sequences a stage; switch_state_det and topo_match
// turn gate signals and circuit variables into the topology k; coef_mem
// supplies the PWL matrices of k; pwl_part and nl_part integrate;
// inductance_lut and minv_unit give M^-1 for the present position;
// dac_out drives four DAC channels once per full step.
//
// Interface: the host writes all tables and registers through cfg_we,
// cfg_addr, cfg_wdata (layout in imex_pkg) before raising run. gate carries
// the controller's gate signals (from the fibre link), u_in the independent
// source(s), pos_ext the position in external-position mode. dac_data and
// dac_clip go to the DAC; the state vectors are brought out for debugging.
// Timing: one stage per TICK_CYCLES clock cycles (15 = 75 ns at an assumed
// 200 MHz); a stage completes 11 cycles after its tick.
// The sequencer's busy flag and the switch detector's changed flag are left
// unused here: overrun already reports a busy tick, and a topology change is
// visible on topo.
module imex_top
  import imex_pkg::*;
#(
  parameter int unsigned TICK_CYCLES = 15,
  parameter int unsigned N_XL        = 12,
  parameter int unsigned N_U         = 1,
  parameter int unsigned N_SW        = 28,
  parameter int unsigned N_TOPO      = 16,
  parameter int unsigned N_PTS       = 26,
  localparam int unsigned N_Y        = 3,
  localparam int unsigned NV         = N_XL + N_U + N_Y,
  localparam int unsigned N_MON      = NV + 6,
  localparam int unsigned TW         = (N_TOPO > 1) ? $clog2(N_TOPO) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // host configuration
  input  logic            cfg_we,
  input  logic [31:0]     cfg_addr,
  input  logic [63:0]     cfg_wdata,
  // real-time inputs
  input  logic            run,
  input  logic [N_SW-1:0] gate,
  input  fx_t             u_in [N_U],
  input  fx_t             pos_ext,
  // DAC
  output logic [15:0]     dac_data [4],
  output logic [3:0]      dac_clip,
  // status
  output logic            stage2,
  output logic            stage_done,
  output logic            full_step,
  output logic            overrun,
  output logic [63:0]     t_p,
  output logic [N_SW-1:0] sw_state,
  output logic [TW-1:0]   topo,
  output logic            topo_miss,
  output logic            g_valid,
  output logic            pos_mode,
  output fx_t             pos,
  output fx_t             x_l  [N_XL],
  output fx_t             y_l  [N_Y],
  output fx_t             x_nl [N_Y],
  output fx_t             y_nl [N_Y]
);

  cfg_wr_t cfg;
  assign cfg = '{we: cfg_we, addr: cfg_addr, data: cfg_wdata};

  // step-size registers for the NL part
  fx_t h_half, h_full;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_half <= H_HALF_DEF;
      h_full <= H_FULL_DEF;
    end else if (cfg.we && cfg.addr[31:28] == CFG_REG) begin
      if (cfg.addr[7:0] == REG_H_HALF) h_half <= fx_t'(cfg.data);
      if (cfg.addr[7:0] == REG_H_FULL) h_full <= fx_t'(cfg.data);
    end
  end

  // sequencer
  logic sw_sample, topo_sample, nl_out_start, coef_load, pwl_start, nl_step, busy;
  logic nl_out_done, pwl_done;

  stage_ctrl #(.TICK_CYCLES(TICK_CYCLES)) u_ctrl (
    .clk, .rst_n, .run, .nl_out_done, .pwl_done, .stage2,
    .sw_sample, .topo_sample, .nl_out_start, .coef_load, .pwl_start,
    .nl_step, .stage_done, .full_step, .busy, .overrun, .t_p
  );

  // variable vector [x_l; u_l; y_nl]
  fx_t vars [NV];
  always_comb begin
    for (int i = 0; i < N_XL; i++) vars[i] = x_l[i];
    for (int i = 0; i < N_U; i++)  vars[N_XL+i] = u_in[i];
    for (int i = 0; i < N_Y; i++)  vars[N_XL+N_U+i] = y_nl[i];
  end

  switch_state_det #(.N_SW(N_SW), .NV(NV)) u_swdet (
    .clk, .rst_n, .cfg, .sample(sw_sample), .gate, .vars, .sw_state, .changed()
  );

  topo_match #(.N_SW(N_SW), .N_TOPO(N_TOPO)) u_topo (
    .clk, .rst_n, .cfg, .sample(topo_sample), .sw_state, .topo, .miss(topo_miss)
  );

  fx_t mat [N_XL+N_Y][NV];
  coef_mem #(.N_TOPO(N_TOPO), .N_XL(N_XL), .N_Y(N_Y), .NV(NV)) u_coef (
    .clk, .rst_n, .cfg, .load(coef_load), .topo, .stage2, .mat
  );

  pwl_part #(.N_XL(N_XL), .N_U(N_U)) u_pwl (
    .clk, .rst_n, .start(pwl_start), .stage2, .mat, .u(u_in), .y_nl,
    .x_l, .y_l, .done(pwl_done)
  );

  // operating condition and coupling inductances
  fx_t ind [N_IND];
  fx_t g [3][3];

  inductance_lut #(.N_PTS(N_PTS)) u_lut (
    .clk, .rst_n, .cfg, .step(full_step), .pos_ext, .pos, .pos_mode, .ind
  );

  minv_unit u_minv (.clk, .rst_n, .ind, .g, .g_valid);

  nl_part u_nl (
    .clk, .rst_n, .g, .y_l, .h_half, .h_full,
    .out_start(nl_out_start), .out_done(nl_out_done),
    .step(nl_step), .stage2, .x_nl, .y_nl
  );

  // DAC: monitor vector [x_l; u_l; y_nl; x_nl; y_l]
  fx_t mon [N_MON];
  always_comb begin
    for (int i = 0; i < NV; i++)  mon[i] = vars[i];
    for (int i = 0; i < N_Y; i++) mon[NV+i] = x_nl[i];
    for (int i = 0; i < N_Y; i++) mon[NV+N_Y+i] = y_l[i];
  end

  dac_out #(.N_MON(N_MON), .N_CH(4)) u_dac (
    .clk, .rst_n, .cfg, .update(full_step), .mon, .dac(dac_data), .clip(dac_clip)
  );

endmodule
