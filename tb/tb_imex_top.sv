// tb_imex_top: end-to-end test of the solver at its default parameters.
//
// Test circuit (units: us, uH, uF, V, A, uWb): an H-bridge fed from u_in
// drives Lf (42.95 uH, 0.1 Ohm) into Cp (0.4428 uF), which is parallel to the
// transmitter coil Lp; two receiver coils Ls1, Ls2 (254 uH, resonant with
// Cs = 0.06234 uF at 40 kHz) drive their series capacitors and a 5 Ohm load.
// PWL states x_l = [i_Lf, v_Cp, v_Cs1, v_Cs2, 0...]; NL states = coil fluxes.
// The coupling table (26 points, 0.06 m apart) follows smooth curves of the
// shape of a transmitter/receiver transit: Lp 37 -> 25 uH, M1 and M2 27 -> 0.
//
// Devices: 0 and 1 are the bridge diagonals (gate only); device 2 is an input
// diode that turns on when u_in > 1000 V and stays on while i_Lf > 0. Six
// topologies map {dev2, gate1, gate0} to the bridge voltage +u, -u, 0.
// The gate pattern is a 40 kHz phase-shifted square wave (333 steps), with
// one shoot-through stage (no topology matches: the old one is kept).
//
// The testbench computes the stage-1/stage-2 matrices itself in real
// arithmetic, runs an independent real-valued model of the same two-stage
// algorithm, and after every stage compares x_l, x_nl, y_nl, y_l (and the
// DAC samples after every full step). Phases: fixed position, predefined
// motion across table points, external position, and a low input voltage
// that leaves device 2 to its zero-crossing rule. Every mechanism is counted
// and must occur. The stage period must be 15 cycles, and no tick may be
// dropped (overrun).
module tb_imex_top;
  import imex_pkg::*;
  localparam int N_XL = 12, NV = 16, N_SW = 28;
  localparam real H = 0.075, LF = 42.95, RF = 0.1, CP = 0.4428, CS = 0.06234, RL = 5.0, LS = 254.0;
  localparam int PER = 333;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [31:0] cfg_addr = 0;
  logic [63:0] cfg_wdata = 0;
  logic run = 0;
  logic [N_SW-1:0] gate = 0;
  fx_t u_in [1];
  fx_t pos_ext = 0;
  logic [15:0] dac_data [4];
  logic [3:0] dac_clip;
  logic stage2, stage_done, full_step, overrun, topo_miss, g_valid, pos_mode;
  logic [63:0] t_p;
  logic [N_SW-1:0] sw_state;
  logic [3:0] topo;
  fx_t pos;
  fx_t x_l [N_XL];
  fx_t y_l [3];
  fx_t x_nl [3];
  fx_t y_nl [3];

  imex_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  function automatic longint fx(real r);
    return longint'(r * (2.0 ** 40));
  endfunction
  function automatic real rl(fx_t v);
    return real'(v) / (2.0 ** 40);
  endfunction
  function automatic real sig(real x);
    return 1.0 / (1.0 + $exp(x));
  endfunction

  task automatic wr(logic [31:0] a, logic [63:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // table of inductances: [point][Lp Ls1 Ls2 M1 M2]
  real tbl [26][5];
  function automatic void table_at(real x, output real l [5]);
    real s, f;
    int i;
    s = x / 0.06;
    if (s < 0) begin i = 0; f = 0; end
    else if (s >= 25.0) begin i = 24; f = 1.0; end
    else begin i = int'($floor(s)); f = s - i; end
    for (int k = 0; k < 5; k++) l[k] = tbl[i][k] + f * (tbl[i+1][k] - tbl[i][k]);
  endfunction

  // reference G = M^-1 (real)
  real rg [3][3];
  task automatic ref_g(real x);
    real l [5];
    real m [3][3], a [3][6];
    table_at(x, l);
    m = '{'{l[0], l[3], l[4]}, '{l[3], l[1], 0.0}, '{l[4], 0.0, l[2]}};
    for (int r = 0; r < 3; r++) for (int c = 0; c < 6; c++) a[r][c] = (c < 3) ? m[r][c] : ((c - 3 == r) ? 1.0 : 0.0);
    for (int p = 0; p < 3; p++) begin
      real d;
      d = a[p][p];
      for (int c = 0; c < 6; c++) a[p][c] /= d;
      for (int r = 0; r < 3; r++) if (r != p) begin
        real f;
        f = a[r][p];
        for (int c = 0; c < 6; c++) a[r][c] -= f * a[p][c];
      end
    end
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) rg[r][c] = a[r][c + 3];
  endtask

  // coefficient matrices per bridge voltage sign (index 0:+1, 1:-1, 2:0)
  real p1 [3][N_XL][NV], p2 [3][N_XL][NV], cd [3][NV];
  task automatic build(int bi, real sgn);
    real A [4][4], B [4][4], M [4][4], Mi [4][8];
    A = '{default: 0.0};
    B = '{default: 0.0};
    A[0][0] = -RF / LF; A[0][1] = -1.0 / LF; B[0][0] = sgn / LF;
    A[1][0] = 1.0 / CP; B[1][1] = -1.0 / CP;
    B[2][2] = 1.0 / CS;
    B[3][3] = 1.0 / CS;
    // (I - h/2 A)^-1
    for (int r = 0; r < 4; r++) for (int c = 0; c < 8; c++)
      Mi[r][c] = (c < 4) ? (((r == c) ? 1.0 : 0.0) - H / 2 * A[r][c]) : ((c - 4 == r) ? 1.0 : 0.0);
    for (int p = 0; p < 4; p++) begin
      real d;
      d = Mi[p][p];
      for (int c = 0; c < 8; c++) Mi[p][c] /= d;
      for (int r = 0; r < 4; r++) if (r != p) begin
        real f;
        f = Mi[r][p];
        for (int c = 0; c < 8; c++) Mi[r][c] -= f * Mi[p][c];
      end
    end
    for (int r = 0; r < N_XL; r++) for (int c = 0; c < NV; c++) begin p1[bi][r][c] = 0; p2[bi][r][c] = 0; end
    for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < 4; c++) begin
        p1[bi][r][c] = Mi[r][c + 4];
        p2[bi][r][c] = H * A[r][c];
        p2[bi][r][12 + c] = H * B[r][c];
        begin
          real acc;
          acc = 0;
          for (int k = 0; k < 4; k++) acc += Mi[r][k + 4] * H / 2 * B[k][c];
          p1[bi][r][12 + c] = acc;
        end
      end
    end
    for (int r = 0; r < 3; r++) for (int c = 0; c < NV; c++) cd[r][c] = 0;
    cd[0][1] = 1.0;
    cd[1][2] = -1.0; cd[1][14] = -RL;
    cd[2][3] = -1.0; cd[2][15] = -RL;
  endtask

  // ---------------- reference model state ----------------
  real rx [N_XL], rxb [N_XL], rn [3], rnb [3], ryn [3], ryl [3];
  bit  rdev2;
  int  rk;  // topology index

  // patterns: k -> {dev2, g1, g0}; matrices index
  int pat_bits [6] = '{3'b101, 3'b110, 3'b100, 3'b001, 3'b010, 3'b000};
  int pat_mat  [6] = '{0, 1, 2, 0, 1, 2};

  task automatic ref_stage(bit s2, real u, logic [1:0] g);
    real v [NV], res [N_XL + 3];
    int pb, kk;
    bit hit;
    // switching states from the present variables
    rdev2 = (u > 1000.0) || (rdev2 && rx[0] > 0.0);
    pb = {rdev2, g[1], g[0]};
    hit = 0;
    for (int k = 5; k >= 0; k--) if (pat_bits[k] == pb) begin hit = 1; kk = k; end
    if (hit) rk = kk;
    // NL output
    for (int r = 0; r < 3; r++) begin
      ryn[r] = 0;
      for (int c = 0; c < 3; c++) ryn[r] += rg[r][c] * rn[c];
    end
    for (int i = 0; i < N_XL; i++) v[i] = rx[i];
    v[12] = u;
    for (int i = 0; i < 3; i++) v[13 + i] = ryn[i];
    for (int r = 0; r < N_XL; r++) begin
      res[r] = 0;
      for (int c = 0; c < NV; c++) res[r] += (s2 ? p2[pat_mat[rk]][r][c] : p1[pat_mat[rk]][r][c]) * v[c];
    end
    for (int r = 0; r < 3; r++) begin
      ryl[r] = 0;
      for (int c = 0; c < NV; c++) ryl[r] += cd[r][c] * v[c];
    end
    if (!s2) begin
      for (int i = 0; i < N_XL; i++) begin rxb[i] = rx[i]; rx[i] = res[i]; end
      for (int i = 0; i < 3; i++) begin rnb[i] = rn[i]; rn[i] = rn[i] + H / 2 * ryl[i]; end
    end else begin
      for (int i = 0; i < N_XL; i++) rx[i] = rxb[i] + res[i];
      for (int i = 0; i < 3; i++) rn[i] = rnb[i] + H * ryl[i];
    end
  endtask

  real maxerr = 0;
  int  skip = 0;
  task automatic cmp(string tag, real d, real r, real tol);
    real e;
    e = d - r;
    if (e < 0) e = -e;
    e = e / (1.0 + (r < 0 ? -r : r));
    if (skip == 0) begin
      checks++;
      if (e > maxerr) maxerr = e;
      if (e > tol) begin
        failures++;
        if (failures < 20) $display("stage %0d %s dut=%f ref=%f", t_p, tag, d, r);
      end
    end
  endtask

  // M^-1 as the DUT holds it, cycle by cycle. minv_unit publishes a new
  // matrix with g_valid and in that same cycle captures the inductances,
  // which the table interpolated from the position of the cycle before.
  real ghist [16][3][3];
  real gcur [3][3];
  real pend_pos = 0;
  fx_t pos_d1 = 0;
  longint pc = 0;
  always @(posedge clk) begin
    if (g_valid) begin
      ref_g(pend_pos);
      gcur = rg;
      pend_pos = rl(pos_d1);
    end
    ghist[pc % 16] = gcur;
    pc++;
    pos_d1 = pos;
  end

  // ---------------- stimulus ----------------
  int n_stage1 = 0, n_stage2 = 0, n_topo_chg = 0, n_miss = 0, n_gupd = 0, n_mode = 0;
  int n_clip = 0, n_dev2_volt = 0, n_dev2_hold = 0, n_dev2_off = 0, n_pos_move = 0, n_period_bad = 0;
  int n_overrun = 0;
  always @(posedge clk) if (g_valid) n_gupd++;
  // a stage fits in a tick at the defaults, so no tick may be dropped
  always @(posedge clk) if (rst_n && overrun) begin n_overrun++; $display("overrun at cycle %0d", cyc); end

  function automatic logic [1:0] gates_for(int step, int stg);
    int ph;
    ph = step % PER;
    if (step == 1000 && stg == 1) return 2'b11;  // shoot-through: no topology matches
    if (ph < 150) return 2'b01;
    if (ph < 167) return 2'b00;
    if (ph < 317) return 2'b10;
    return 2'b00;
  endfunction

  initial begin
    real x0, vel, xref, uval, tol;
    int step, last_done, last_topo;
    bit last_dev2;
    logic [1:0] g;
    u_in[0] = 0;
    for (int p = 0; p < 26; p++) begin
      real x;
      x = 0.06 * p;
      tbl[p][0] = 25.0 + 12.0 * sig((x - 1.0) / 0.1);
      tbl[p][1] = LS;
      tbl[p][2] = LS;
      tbl[p][3] = 27.0 * sig((x - 0.75) / 0.06);
      tbl[p][4] = 27.0 * sig((x - 1.30) / 0.06);
    end
    build(0, 1.0);
    build(1, -1.0);
    build(2, 0.0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- configuration ----
    for (int k = 0; k < 6; k++) begin
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < N_XL; r++)
          for (int c = 0; c < NV; c++) begin
            real v;
            v = s ? p2[pat_mat[k]][r][c] : p1[pat_mat[k]][r][c];
            if (v != 0.0) wr({4'h0, 8'(k), 2'(s), 6'(r), 6'(c), 6'h0}, fx(v));
          end
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < NV; c++)
          if (cd[r][c] != 0.0) wr({4'h0, 8'(k), 2'd2, 6'(r), 6'(c), 6'h0}, fx(cd[r][c]));
      wr({4'h1, 8'(k), 20'h0}, {1'b1, 35'h0, 28'(pat_bits[k])});
    end
    wr({4'h4, 12'h0, 8'd2, 8'h00}, {44'h0, 8'd0, 1'b0, 8'd12, 1'b0, 1'b1, 1'b1});  // dev2 cfg
    wr({4'h4, 12'h0, 8'd2, 8'h01}, fx(1000.0));
    for (int p = 0; p < 26; p++)
      for (int k = 0; k < 5; k++) wr({4'h2, 12'h0, 8'(p), 5'h0, 3'(k)}, fx(tbl[p][k]));
    wr({4'h3, 20'h0, 8'd2}, fx(1.0 / 0.06));
    x0 = 0.3;
    wr({4'h3, 20'h0, 8'd5}, fx(x0));
    wr({4'h3, 20'h0, 8'd4}, 0);
    wr({4'h3, 20'h0, 8'd3}, 0);
    wr({4'h5, 26'h0, 2'd0}, {50'h0, 6'd32, 8'd0});   // i_Lf, 1/256 A
    wr({4'h5, 26'h0, 2'd1}, {50'h0, 6'd32, 8'd16});  // Psi_p
    wr({4'h5, 26'h0, 2'd2}, {50'h0, 6'd34, 8'd20});  // u2
    wr({4'h5, 26'h0, 2'd3}, {50'h0, 6'd32, 8'd12});  // u_in (clips)
    // let M^-1 settle
    repeat (400) @(negedge clk);
    // ---- reference init ----
    for (int i = 0; i < N_XL; i++) begin rx[i] = 0; rxb[i] = 0; end
    for (int i = 0; i < 3; i++) begin rn[i] = 0; rnb[i] = 0; ryn[i] = 0; ryl[i] = 0; end
    rdev2 = 0; rk = 0;
    xref = x0;
    ref_g(xref);
    uval = 1500.0;
    u_in[0] = fx(uval);
    gate = '0;
    gate[1:0] = gates_for(0, 0);
    last_done = -1; last_topo = 0; last_dev2 = 0;
    vel = 0;
    tol = 1e-4;  // accumulated Q24.40 rounding over 14000 stages
    @(negedge clk);
    run = 1;
    for (step = 0; step < 7000; step++) begin
      // phase changes at step boundaries
      if (step == 2500) begin  // predefined motion through the M1 transition
        x0 = 0.70;
        wr({4'h3, 20'h0, 8'd5}, fx(x0));
        vel = 2.0e-5;
        wr({4'h3, 20'h0, 8'd4}, fx(vel));
        xref = x0;
      end
      if (step == 5000) begin  // external position
        pos_ext = fx(1.02);
        wr({4'h3, 20'h0, 8'd3}, 1);
        n_mode++;
        xref = 1.02;
      end
      if (step == 6000) begin  // input below the diode threshold
        uval = 600.0;
        u_in[0] = fx(uval);
      end
      for (int stg = 0; stg < 2; stg++) begin
        g = gates_for(step, stg);
        gate[1:0] = g;
        // wait for the DUT stage; its NL output read M^-1 nine cycles
        // before stage_done
        do @(negedge clk); while (!stage_done);
        rg = ghist[(pc - 9) % 16];
        ref_stage(stg == 1, uval, g);
        if (last_done >= 0 && cyc - last_done != 15) n_period_bad++;
        last_done = int'(cyc);
        if (stg == 0) n_stage1++; else n_stage2++;
        checks++;
        if (stage2 !== stg[0]) begin failures++; $display("stage flag mismatch"); end
        if (topo_miss) n_miss++;
        if (topo != last_topo) n_topo_chg++;
        last_topo = topo;
        checks++;
        if (topo !== 4'(rk)) begin failures++; if (failures < 20) $display("topo %0d ref %0d", topo, rk); end
        if (sw_state[2] && uval > 1000.0) n_dev2_volt++;
        if (sw_state[2] && uval < 1000.0) n_dev2_hold++;
        if (!sw_state[2] && last_dev2) n_dev2_off++;
        last_dev2 = sw_state[2];
        for (int i = 0; i < 4; i++) cmp($sformatf("x_l[%0d]", i), rl(x_l[i]), rx[i], tol);
        for (int i = 4; i < N_XL; i++) begin checks++; if (x_l[i] != 0) failures++; end
        for (int i = 0; i < 3; i++) begin
          cmp($sformatf("x_nl[%0d]", i), rl(x_nl[i]), rn[i], tol);
          cmp($sformatf("y_nl[%0d]", i), rl(y_nl[i]), ryn[i], tol);
          cmp($sformatf("y_l[%0d]", i), rl(y_l[i]), ryl[i], tol);
        end
        if (skip > 0) skip--;
        if (stg == 1) begin
          fx_t pos_before;
          pos_before = pos;
          @(negedge clk);  // DAC and position update
          if (pos != pos_before) n_pos_move++;
          if (vel != 0 && step < 5000) xref = xref + vel;
          n_clip += $countones(dac_clip);
          checks += 2;
          if (dac_clip[3] !== 1'b1 || dac_data[3] !== 16'h7fff) failures++;
          begin
            real e0, dd;
            e0 = rx[0] * 256.0;
            if (e0 > 32767.0) e0 = 32767.0;
            if (e0 < -32768.0) e0 = -32768.0;
            dd = $signed(dac_data[0]) - e0;
            if (dd < 0) dd = -dd;
            if (skip == 0) begin
              checks++;
              if (dd > 2.0 + 256.0 * tol * (1.0 + (rx[0] < 0 ? -rx[0] : rx[0]))) begin
                failures++;
                if (failures < 20) $display("dac0 %0d ref %f", $signed(dac_data[0]), e0);
              end
            end
          end
          end
        end
      end
    run = 0;
    $display("stage1=%0d stage2=%0d topo_changes=%0d topo_miss=%0d minv_updates=%0d mode_switches=%0d",
             n_stage1, n_stage2, n_topo_chg, n_miss, n_gupd, n_mode);
    $display("dac_clips=%0d dev2_voltage_on=%0d dev2_current_held=%0d dev2_turn_off=%0d position_moves=%0d bad_periods=%0d",
             n_clip, n_dev2_volt, n_dev2_hold, n_dev2_off, n_pos_move, n_period_bad);
    $display("max relative error %g; final i_Lf=%f v_Cp=%f i_s1=%f", maxerr, rl(x_l[0]), rl(x_l[1]), rl(y_nl[1]));
    $display("overruns=%0d", n_overrun);
    checks += 13;
    if (n_stage1 == 0) failures++;
    if (n_stage2 == 0) failures++;
    if (n_topo_chg == 0) failures++;
    if (n_miss == 0) failures++;
    if (n_gupd == 0) failures++;
    if (n_mode == 0) failures++;
    if (n_clip == 0) failures++;
    if (n_dev2_volt == 0) failures++;
    if (n_dev2_hold == 0) failures++;
    if (n_dev2_off == 0) failures++;
    if (n_pos_move == 0) failures++;
    if (n_period_bad != 0) failures++;
    if (n_overrun != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
