// tb_inductance_lut: loads a 26-point table of five inductances given by a
// formula, then checks the position register (predefined constant-speed
// motion from an initial position, then external position input) and the
// linearly interpolated, end-clamped outputs against a reference here.
module tb_inductance_lut;
  import imex_pkg::*;
  localparam int N_PTS = 26;
  logic clk = 0, rst_n = 0, step = 0, pos_mode;
  cfg_wr_t cfg;
  fx_t pos_ext, pos;
  fx_t ind [N_IND];
  longint tbl [N_PTS][N_IND];
  longint inv_dx;
  int checks = 0, failures = 0;

  inductance_lut #(.N_PTS(N_PTS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [31:0] a, logic [63:0] d);
    @(negedge clk);
    cfg.we = 1; cfg.addr = a; cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic longint mul(longint a, longint b);
    logic signed [127:0] p;
    p = (128'(a) * 128'(b)) >>> 40;
    return longint'(p);
  endfunction

  task automatic check_ind(longint p, string tag);
    longint s, f;
    int i;
    s = mul(p, inv_dx);
    if (s < 0) begin i = 0; f = 0; end
    else if ((s >>> 40) >= N_PTS - 1) begin i = N_PTS - 2; f = 64'sd1 <<< 40; end
    else begin i = int'(s >>> 40); f = s & ((64'sd1 <<< 40) - 1); end
    for (int k = 0; k < N_IND; k++) begin
      longint e;
      e = tbl[i][k] + mul(f, tbl[i+1][k] - tbl[i][k]);
      checks++;
      if (ind[k] !== e) begin
        failures++;
        $display("%s pos=%h k=%0d got %h exp %h", tag, p, k, ind[k], e);
      end
    end
  endtask

  initial begin
    longint rp, vel;
    cfg = '0; pos_ext = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // table: Lp falls 37 -> 25 uH, M1 27 -> 0, M2 27 -> 0 later, Ls1/Ls2 constant-ish
    for (int p = 0; p < N_PTS; p++) begin
      tbl[p][0] = (longint'(37 * 1024 - p * 480)) <<< 30;
      tbl[p][1] = (longint'(30 * 1024 + p * 7)) <<< 30;
      tbl[p][2] = (longint'(30 * 1024 - p * 5)) <<< 30;
      tbl[p][3] = (p < 16) ? (longint'(27 * 1024 - p * p * 108)) <<< 30 : 0;
      tbl[p][4] = (longint'(27 * 1024 - p * 1000)) <<< 30;
      for (int k = 0; k < N_IND; k++) wr({4'h2, 12'h0, 8'(p), 5'h0, 3'(k)}, tbl[p][k]);
    end
    inv_dx = 64'sd18325193796266;  // 1/0.06 * 2^40
    wr({4'h3, 20'h0, 8'd2}, inv_dx);
    // predefined motion
    rp = 64'sd1 <<< 38;   // 0.25 m
    vel = 64'sd1 <<< 34;  // 1/64 m per step
    wr({4'h3, 20'h0, 8'd5}, rp);
    wr({4'h3, 20'h0, 8'd4}, vel);
    wr({4'h3, 20'h0, 8'd3}, 0);
    @(negedge clk);
    checks++;
    if (pos !== rp || pos_mode) failures++;
    check_ind(rp, "init");
    for (int it = 0; it < 120; it++) begin
      @(negedge clk) step = 1;
      @(negedge clk) step = 0;
      rp = rp + vel;
      checks++;
      if (pos !== rp) begin failures++; $display("pos %h exp %h", pos, rp); end
      @(negedge clk);
      check_ind(rp, "move");  // also covers the clamp past 1.5 m
    end
    // external position
    wr({4'h3, 20'h0, 8'd3}, 1);
    for (int it = 0; it < 100; it++) begin
      rp = longint'($signed($urandom_range(0, 2**20)) - 2**17) <<< 21;
      @(negedge clk) pos_ext = rp;
      step = it[0];  // ignored in external mode
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (pos !== rp || !pos_mode) failures++;
      check_ind(rp, "ext");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
