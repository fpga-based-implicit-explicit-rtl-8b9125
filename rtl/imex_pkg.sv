// imex_pkg: shared types, constants and arithmetic for the half-step
// implicit-explicit (IMEX) real-time solver.
//
// Numbers: every simulated quantity is a signed 64-bit fixed-point word with
// 24 integer bits and 40 fraction bits (Q24.40), the format the solver was
// published with. Multiplication keeps the 128-bit product, drops the 40
// low fraction bits (truncation toward minus infinity) and saturates to 64
// bits. Rounding and overflow handling are this design's choice.
//
// Configuration bus: the host writes every table and register through one
// write-only bus (cfg_wr_t). The 32-bit address holds a 4-bit region in
// bits [31:28]; the meaning of the rest depends on the region (see the
// CFG_* constants below). The register layout is this design's own.
package imex_pkg;

  localparam int unsigned FW = 64;  // word width
  localparam int unsigned FB = 40;  // fraction bits (64 - 24 integer bits)

  typedef logic signed [FW-1:0] fx_t;

  localparam fx_t FX_MAX = {1'b0, {(FW-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(FW-1){1'b0}}};
  localparam fx_t FX_ONE = fx_t'(64'sd1 <<< FB);

  // Convert a real constant to Q24.40 (elaboration-time use only).
  function automatic fx_t fx_from_real(real r);
    return fx_t'($rtoi(r * (2.0 ** FB)));
  endfunction

  // Saturate a wide signed value to 64 bits.
  function automatic fx_t fx_sat(logic signed [127:0] v);
    if (v > 128'(FX_MAX)) return FX_MAX;
    if (v < 128'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(v);
  endfunction

  // Q24.40 product: full product, arithmetic shift, saturate.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [127:0] p;
    p = 128'(a) * 128'(b);
    return fx_sat(p >>> FB);
  endfunction

  // Q24.40 sum with saturation.
  function automatic fx_t fx_add(fx_t a, fx_t b);
    logic signed [127:0] s;
    s = 128'(a) + 128'(b);
    return fx_sat(s);
  endfunction

  // ---------------- configuration bus ----------------
  typedef struct packed {
    logic        we;
    logic [31:0] addr;
    logic [63:0] data;
  } cfg_wr_t;

  typedef enum logic [3:0] {
    CFG_COEF = 4'h0,  // [27:20] topo, [19:18] set, [17:12] row, [11:6] col
    CFG_TOPO = 4'h1,  // [27:20] topo; data[63] valid, data[N_SW-1:0] pattern
    CFG_LUT  = 4'h2,  // [15:8] point, [2:0] inductance (ind_e)
    CFG_REG  = 4'h3,  // [7:0] register (reg_e)
    CFG_SW   = 4'h4,  // [15:8] device, [0] field: 0 selectors, 1 threshold
    CFG_DAC  = 4'h5   // [1:0] channel; data[7:0] variable, data[13:8] shift
  } cfg_region_e;

  // Coefficient sets of one topology.
  typedef enum logic [1:0] {
    SET_P1 = 2'd0,  // stage-1 step matrix, eq. (7)
    SET_P2 = 2'd1,  // stage-2 step matrix, eq. (9)
    SET_CD = 2'd2   // output matrix [C D], eq. (5)
  } coef_set_e;

  // Inductances of the magnetic coupling component.
  typedef enum logic [2:0] {
    IND_LP  = 3'd0,
    IND_LS1 = 3'd1,
    IND_LS2 = 3'd2,
    IND_M1  = 3'd3,
    IND_M2  = 3'd4
  } ind_e;
  localparam int unsigned N_IND = 5;

  // Scalar registers.
  typedef enum logic [7:0] {
    REG_H_HALF   = 8'd0,  // h/2 for eq. (6)
    REG_H_FULL   = 8'd1,  // h   for eq. (8)
    REG_INV_DX   = 8'd2,  // 1 / table spacing
    REG_POS_MODE = 8'd3,  // 0: predefined motion, 1: external position
    REG_VEL_STEP = 8'd4,  // position increment per full step (v*h)
    REG_POS_INIT = 8'd5   // writes the position register
  } reg_e;

  // Device selector fields for switching-state determination.
  typedef struct packed {
    logic [7:0] i_idx;  // index of the device current in [x_l; u_l; y_nl]
    logic       i_neg;  // current enters the device with negative sign
    logic [7:0] v_idx;  // index of the forward voltage
    logic       v_neg;
    logic       v_en;   // device may turn on from its forward voltage
    logic       i_en;   // device keeps conducting while current flows
  } sw_cfg_t;

  // Default step registers: h = 75 ns, expressed in microseconds so that
  // flux (uWb) = time (us) * voltage (V).
  localparam fx_t H_FULL_DEF = 64'sd82463372083;  // 0.075 * 2^40
  localparam fx_t H_HALF_DEF = 64'sd41231686041;  // 0.0375 * 2^40

endpackage
