// tb_coef_mem: fills every topology's P1, P2 and CD matrices with random
// words through the configuration bus, then loads each (topology, stage)
// pair and compares all rows: step rows from P1 or P2, output rows from CD.
// Out-of-range writes must not disturb the store.
module tb_coef_mem;
  import imex_pkg::*;
  localparam int N_TOPO = 16, N_XL = 12, N_Y = 3, NV = 16;
  logic clk = 0, rst_n = 0, load = 0, stage2 = 0;
  logic [3:0] topo = 0;
  cfg_wr_t cfg;
  fx_t mat [N_XL+N_Y][NV];
  fx_t m [N_TOPO][3][N_XL][NV];
  int checks = 0, failures = 0;

  coef_mem #(.N_TOPO(N_TOPO), .N_XL(N_XL), .N_Y(N_Y), .NV(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
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

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < N_TOPO; t++)
      for (int s = 0; s < 3; s++)
        for (int r = 0; r < ((s == 2) ? N_Y : N_XL); r++)
          for (int c = 0; c < NV; c++) begin
            m[t][s][r][c] = {$urandom, $urandom};
            wr({4'h0, 8'(t), 2'(s), 6'(r), 6'(c), 6'h0}, m[t][s][r][c]);
          end
    // out-of-range writes: row beyond CD, column beyond NV, set 3
    wr({4'h0, 8'd0, 2'd2, 6'd5, 6'd0, 6'h0}, 64'hdead);
    wr({4'h0, 8'd0, 2'd0, 6'd0, 6'd20, 6'h0}, 64'hdead);
    wr({4'h0, 8'd0, 2'd3, 6'd0, 6'd0, 6'h0}, 64'hdead);
    wr({4'h3, 8'd0, 2'd0, 6'd0, 6'd0, 6'h0}, 64'hdead);  // other region
    for (int it = 0; it < 2 * N_TOPO; it++) begin
      int t, s;
      t = it % N_TOPO;
      s = it / N_TOPO;
      @(negedge clk) begin load = 1; topo = 4'(t); stage2 = s[0]; end
      @(negedge clk) begin load = 0; topo = 4'(t + 1); stage2 = !s[0]; end
      for (int r = 0; r < N_XL + N_Y; r++)
        for (int c = 0; c < NV; c++) begin
          fx_t e;
          e = (r < N_XL) ? m[t][s][r][c] : m[t][2][r-N_XL][c];
          checks++;
          if (mat[r][c] !== e) begin
            failures++;
            if (failures < 10) $display("t=%0d s=%0d r=%0d c=%0d got %h exp %h", t, s, r, c, mat[r][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
