// dac_out: formats simulated variables for a quad-channel 16-bit DAC.
//
// Each of the N_CH channels picks one entry of the monitor vector mon
// (CFG_DAC: addr[1:0] channel, data[7:0] entry index, data[13:8] right
// shift), scales it by an arithmetic right shift and saturates the result to
// a 16-bit two's-complement sample. clip[ch] is set on an update whose value
// did not fit. The samples are refreshed on each update pulse (once per full
// integration step) and held in between, so a waveform recorder behind the
// DAC sees the simulated signals. Channel selection, scaling and saturation
// are this design's choices; the DAC's own serial interface is outside.
//
// Timing: dac and clip change one cycle after update. Reset: all channels
// select entry 0 with no shift, samples 0.
module dac_out
  import imex_pkg::*;
#(
  parameter int unsigned N_MON = 22,
  parameter int unsigned N_CH  = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic             update,
  input  fx_t              mon [N_MON],
  output logic [15:0]      dac [N_CH],
  output logic [N_CH-1:0]  clip
);

  logic [7:0] sel [N_CH];
  logic [5:0] shamt [N_CH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int ch = 0; ch < N_CH; ch++) begin
        sel[ch]   <= '0;
        shamt[ch] <= '0;
        dac[ch]   <= '0;
      end
      clip <= '0;
    end else begin
      if (cfg.we && cfg.addr[31:28] == CFG_DAC && cfg.addr[1:0] < N_CH) begin
        sel[cfg.addr[1:0]]   <= cfg.data[7:0];
        shamt[cfg.addr[1:0]] <= cfg.data[13:8];
      end
      if (update) begin
        for (int ch = 0; ch < N_CH; ch++) begin
          fx_t v;
          v = '0;
          if (sel[ch] < N_MON) v = mon[sel[ch]] >>> shamt[ch];
          if (v > 64'sd32767) begin
            dac[ch]  <= 16'h7fff;
            clip[ch] <= 1'b1;
          end else if (v < -64'sd32768) begin
            dac[ch]  <= 16'h8000;
            clip[ch] <= 1'b1;
          end else begin
            dac[ch]  <= v[15:0];
            clip[ch] <= 1'b0;
          end
        end
      end
    end
  end

endmodule
