// topo_match: maps the device on/off vector to a topology index k.
//
// The PWL part has one set of system matrices per switching state k. This
// block holds N_TOPO device patterns written by the host (CFG_TOPO region,
// data[63] = entry valid, data[N_SW-1:0] = pattern) and compares all of them
// with the current device states in parallel, like a small CAM. The lowest
// matching entry becomes k. If no entry matches, k keeps its previous value
// and miss is raised for that evaluation, so the solver goes on with the
// last known topology. The table scheme is this design's own; the paper only
// states that the matrices belong to the k-th switching state.
//
// Timing: on a cycle with sample high, topo and miss are updated one cycle
// later. Reset: k = 0, table empty.
module topo_match
  import imex_pkg::*;
#(
  parameter int unsigned N_SW   = 28,
  parameter int unsigned N_TOPO = 16,
  localparam int unsigned TW    = (N_TOPO > 1) ? $clog2(N_TOPO) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_wr_t         cfg,
  input  logic            sample,
  input  logic [N_SW-1:0] sw_state,
  output logic [TW-1:0]   topo,
  output logic            miss
);

  logic [N_SW-1:0]   pat [N_TOPO];
  logic [N_TOPO-1:0] vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int t = 0; t < N_TOPO; t++) pat[t] <= '0;
    end else if (cfg.we && cfg.addr[31:28] == CFG_TOPO && cfg.addr[27:20] < N_TOPO) begin
      pat[cfg.addr[20 +: TW]] <= cfg.data[N_SW-1:0];
      vld[cfg.addr[20 +: TW]] <= cfg.data[63];
    end
  end

  logic          hit;
  logic [TW-1:0] hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int t = N_TOPO - 1; t >= 0; t--) begin
      if (vld[t] && pat[t] == sw_state) begin
        hit     = 1'b1;
        hit_idx = TW'(t);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      topo <= '0;
      miss <= 1'b0;
    end else if (sample) begin
      miss <= !hit;
      if (hit) topo <= hit_idx;
    end
  end

endmodule
