// tb_stage_ctrl: drives the sequencer with stand-in NL and PWL units (done
// three cycles after start, or late to provoke an overrun) and checks the
// tick period, the order and spacing of the stage phases, the alternating
// stage flag, the half-step counter, full_step after stage 2 only, and that
// a tick arriving while busy raises overrun.
module tb_stage_ctrl;
  localparam int TICK = 15;
  logic clk = 0, rst_n = 0, run = 0;
  logic nl_out_done, pwl_done;
  logic stage2, sw_sample, topo_sample, nl_out_start, coef_load, pwl_start, nl_step;
  logic stage_done, full_step, busy, overrun;
  logic [63:0] t_p;
  int checks = 0, failures = 0;
  int pwl_lat = 3;
  logic [2:0] nl_sh;
  logic [31:0] pwl_sh;

  stage_ctrl #(.TICK_CYCLES(TICK)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    nl_sh  <= {nl_sh[1:0], nl_out_start};
    pwl_sh <= {pwl_sh[30:0], pwl_start};
  end
  assign nl_out_done = nl_sh[2];
  assign pwl_done    = pwl_sh[pwl_lat-1];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    int last_sw, n_over, n_full, exp_tp;
    bit exp_s2;
    int ph [8];
    nl_sh = 0; pwl_sh = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks += 2;
    if (t_p != 0 || stage2) failures++;
    if (busy) failures++;
    run = 1;
    last_sw = -1; exp_s2 = 0; exp_tp = 0; n_full = 0;
    for (int s = 0; s < 20; s++) begin
      // wait for sw_sample, record the cycle of each phase
      while (!sw_sample) @(negedge clk);
      ph[0] = cyc;
      checks += 2;
      if (stage2 !== exp_s2) begin failures++; $display("stage flag wrong at stage %0d", s); end
      if (last_sw >= 0 && ph[0] - last_sw != TICK) begin failures++; $display("tick period %0d", ph[0] - last_sw); end
      last_sw = ph[0];
      while (!topo_sample) @(negedge clk); ph[1] = cyc;
      checks++; if (!nl_out_start) failures++;
      while (!coef_load) @(negedge clk); ph[2] = cyc;
      while (!pwl_start) @(negedge clk); ph[3] = cyc;
      while (!nl_step) @(negedge clk); ph[4] = cyc;
      while (!stage_done) @(negedge clk); ph[5] = cyc;
      checks += 6;
      if (ph[1] - ph[0] != 1) failures++;
      if (ph[2] - ph[0] != 2) failures++;
      if (ph[3] - ph[0] != 5) begin failures++; $display("pwl_start at +%0d", ph[3] - ph[0]); end
      if (ph[4] - ph[0] != 9) begin failures++; $display("nl_step at +%0d", ph[4] - ph[0]); end
      if (ph[5] - ph[0] != 10) begin failures++; $display("stage_done at +%0d", ph[5] - ph[0]); end
      if (full_step !== exp_s2) failures++;
      if (full_step) n_full++;
      @(negedge clk);
      exp_tp++;
      exp_s2 = !exp_s2;
      checks += 2;
      if (t_p != 64'(exp_tp)) begin failures++; $display("t_p %0d exp %0d", t_p, exp_tp); end
      if (stage2 !== exp_s2) failures++;
    end
    checks++;
    if (n_full != 10) failures++;
    // slow PWL unit: the next tick finds the sequencer busy
    pwl_lat = 12;
    n_over = 0;
    repeat (100) begin
      @(negedge clk);
      if (overrun) begin
        n_over++;
        checks++;
        if (!busy) failures++;
      end
    end
    checks++;
    if (n_over == 0) begin failures++; $display("no overrun seen"); end
    // run low: no more stages
    run = 0;
    repeat (40) @(negedge clk);
    begin
      logic [63:0] tp0;
      tp0 = t_p;
      repeat (60) @(negedge clk);
      checks++;
      if (t_p != tp0 || busy) failures++;
    end
    $display("overruns=%0d", n_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
