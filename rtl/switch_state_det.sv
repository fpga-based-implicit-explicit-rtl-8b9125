// switch_state_det: switching-states determination for the PWL part.
//
// The on/off state of each power device depends on the gate signal from the
// physical controller and on the simulated circuit. Three checks are made, in
// the order the solver's flow names them:
//   1. switching signal: a gated device conducts;
//   2. zero crossing:    a conducting device whose current (a chosen entry of
//                        the variable vector, optionally negated) is still
//                        positive keeps conducting; when the current reaches
//                        zero or reverses, it turns off;
//   3. voltage amplitude: a device whose forward voltage (another chosen
//                        entry, optionally negated) exceeds a threshold turns
//                        on (diode commutation).
// Which variable is each device's current and voltage, and which checks
// apply, is configuration (CFG_SW region): the check order follows the paper,
// the per-device selector scheme is this design's own.
//
// Interface: vars is [x_l; u_l; y_nl]. On a cycle with sample high the new
// states are computed and appear on sw_state (and changed pulses when any
// bit differs) one cycle later. Reset: all devices off, all checks disabled.
module switch_state_det
  import imex_pkg::*;
#(
  parameter int unsigned N_SW = 28,
  parameter int unsigned NV   = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_wr_t         cfg,
  input  logic            sample,
  input  logic [N_SW-1:0] gate,
  input  fx_t             vars [NV],
  output logic [N_SW-1:0] sw_state,
  output logic            changed
);

  sw_cfg_t dcfg [N_SW];
  fx_t     vth  [N_SW];

  // configuration writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < N_SW; d++) begin
        dcfg[d] <= '0;
        vth[d]  <= '0;
      end
    end else if (cfg.we && cfg.addr[31:28] == CFG_SW && cfg.addr[15:8] < N_SW) begin
      if (cfg.addr[0]) vth[cfg.addr[15:8]]  <= fx_t'(cfg.data);
      else             dcfg[cfg.addr[15:8]] <= sw_cfg_t'(cfg.data[$bits(sw_cfg_t)-1:0]);
    end
  end

  function automatic fx_t pick(logic [7:0] idx, logic neg, fx_t v [NV]);
    fx_t s;
    s = (idx < NV) ? v[idx[$clog2(NV)-1:0]] : '0;
    return neg ? -s : s;
  endfunction

  logic [N_SW-1:0] nxt;
  always_comb begin
    for (int d = 0; d < N_SW; d++) begin
      logic on_gate, on_cur, on_volt;
      on_gate = gate[d];
      on_cur  = dcfg[d].i_en && sw_state[d] && (pick(dcfg[d].i_idx, dcfg[d].i_neg, vars) > 0);
      on_volt = dcfg[d].v_en && (pick(dcfg[d].v_idx, dcfg[d].v_neg, vars) > vth[d]);
      nxt[d]  = on_gate | on_cur | on_volt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sw_state <= '0;
      changed  <= 1'b0;
    end else begin
      changed <= 1'b0;
      if (sample) begin
        sw_state <= nxt;
        changed  <= (nxt != sw_state);
      end
    end
  end

endmodule
