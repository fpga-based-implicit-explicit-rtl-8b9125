// stage_ctrl: real-time sequencer of the half-step IMEX solver.
//
// A real-time tick arrives every TICK_CYCLES clock cycles while run is high.
// Each tick computes one stage, and the stage flag alternates between
// stage 1 (t_n -> t_n+1/2) and stage 2 (t_n+1/2 -> t_n+1), so a full
// integration step h takes two ticks. Within a stage the order is:
//   SW    sample the switching states (gate signals and present variables)
//   TOPO  look up the topology index k; start the NL output eq. (2)
//   LOAD  load the coefficients of k for this stage into the MVM operands
//   WNL   wait for y_nl
//   PWL   start the PWL MVM: output eq. (5) and time step eq. (7) or (9)
//   WPWL  wait for x_l and y_l
//   NLSTP NL time step eq. (6) or (8) with the new y_l
//   END   toggle the stage flag, t_p += 1 half step, pulse stage_done
//         (and full_step after stage 2)
// At 200 MHz and TICK_CYCLES = 15 (75 ns) a stage takes 11 cycles from the
// tick (sw_sample one cycle after the tick, stage_done eleven). A tick that
// finds the sequencer busy is dropped and overrun pulses.
// The stage-flag flow follows the paper's flowchart; the cycle schedule and
// the overrun flag are this design's.
//
// stage2 = 0 means StageFlag == 1. Reset: stage 1, t_p = 0, tick counter 0.
module stage_ctrl #(
  parameter int unsigned TICK_CYCLES = 15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        nl_out_done,
  input  logic        pwl_done,
  output logic        stage2,
  output logic        sw_sample,
  output logic        topo_sample,
  output logic        nl_out_start,
  output logic        coef_load,
  output logic        pwl_start,
  output logic        nl_step,
  output logic        stage_done,
  output logic        full_step,
  output logic        busy,
  output logic        overrun,
  output logic [63:0] t_p
);

  typedef enum logic [3:0] {
    ST_IDLE, ST_SW, ST_TOPO, ST_LOAD, ST_WNL, ST_PWL, ST_WPWL, ST_NLSTP, ST_END
  } st_e;
  st_e st;

  localparam int unsigned CW = (TICK_CYCLES > 1) ? $clog2(TICK_CYCLES) : 1;
  logic [CW-1:0] cnt;
  logic          tick;
  assign tick = run && (cnt == CW'(TICK_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (!run || tick) cnt <= '0;
    else cnt <= cnt + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= ST_IDLE;
      stage2  <= 1'b0;
      t_p     <= '0;
      overrun <= 1'b0;
    end else begin
      overrun <= tick && (st != ST_IDLE);
      case (st)
        ST_IDLE:  if (tick) st <= ST_SW;
        ST_SW:    st <= ST_TOPO;
        ST_TOPO:  st <= ST_LOAD;
        ST_LOAD:  st <= ST_WNL;
        ST_WNL:   if (nl_out_done) st <= ST_PWL;
        ST_PWL:   st <= ST_WPWL;
        ST_WPWL:  if (pwl_done) st <= ST_NLSTP;
        ST_NLSTP: st <= ST_END;
        default: begin  // ST_END
          stage2 <= !stage2;
          t_p    <= t_p + 1'b1;
          st     <= ST_IDLE;
        end
      endcase
    end
  end

  assign busy         = (st != ST_IDLE);
  assign sw_sample    = (st == ST_SW);
  assign topo_sample  = (st == ST_TOPO);
  assign nl_out_start = (st == ST_TOPO);
  assign coef_load    = (st == ST_LOAD);
  assign pwl_start    = (st == ST_PWL);
  assign nl_step      = (st == ST_NLSTP);
  assign stage_done   = (st == ST_END);
  assign full_step    = (st == ST_END) && stage2;

  // the NL output must not complete before the sequencer waits for it
  a_nl_order: assert property (@(posedge clk) disable iff (!rst_n)
    nl_out_done |-> (st == ST_WNL));

endmodule
