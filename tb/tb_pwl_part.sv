// tb_pwl_part: runs alternating stage-1 and stage-2 passes with random
// coefficient matrices and inputs and compares x_l and y_l with a reference
// model of eq. (5), (7), (9) kept here (including the stage-1 base value used
// by eq. (9)). Checks the 3-cycle latency of done.
module tb_pwl_part;
  import imex_pkg::*;
  localparam int N_XL = 12, N_U = 1, N_Y = 3, NV = 16, NR = 15;
  logic clk = 0, rst_n = 0, start = 0, stage2 = 0, done;
  fx_t mat [NR][NV];
  fx_t u [N_U];
  fx_t y_nl [N_Y];
  fx_t x_l [N_XL];
  fx_t y_l [N_Y];
  longint rx [N_XL], rbase [N_XL], ry [N_Y];
  int checks = 0, failures = 0;

  pwl_part #(.N_XL(N_XL), .N_U(N_U)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(logic signed [127:0] a);
    if (a > 128'sh7fffffffffffffff) return 64'sh7fffffffffffffff;
    if (a < -128'sh8000000000000000) return -64'sh8000000000000000;
    return longint'(a);
  endfunction

  initial begin
    for (int i = 0; i < N_XL; i++) begin rx[i] = 0; rbase[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      longint v [NV];
      longint res [NR];
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NV; c++) mat[r][c] = fx_t'($signed($urandom_range(0, 2**20)) - 2**19) <<< 20;
      u[0] = fx_t'($urandom_range(0, 2000)) <<< 40;
      for (int i = 0; i < N_Y; i++) y_nl[i] = fx_t'($signed($urandom_range(0, 400)) - 200) <<< 38;
      for (int i = 0; i < N_XL; i++) v[i] = rx[i];
      v[N_XL] = u[0];
      for (int i = 0; i < N_Y; i++) v[N_XL+1+i] = y_nl[i];
      for (int r = 0; r < NR; r++) begin
        logic signed [127:0] acc;
        acc = 0;
        for (int c = 0; c < NV; c++) acc += (128'(mat[r][c]) * 128'(v[c])) >>> 40;
        res[r] = sat(acc);
      end
      stage2 = it[0];
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      stage2 = !stage2;  // must have been sampled
      repeat (1) begin
        @(negedge clk);
        checks++;
        if (done) begin failures++; $display("done early"); end
      end
      @(negedge clk);
      checks++;
      if (!done) begin failures++; $display("it=%0d done missing", it); end
      if (!it[0]) begin
        for (int i = 0; i < N_XL; i++) begin rbase[i] = rx[i]; rx[i] = res[i]; end
      end else begin
        for (int i = 0; i < N_XL; i++) rx[i] = sat(128'(rbase[i]) + 128'(res[i]));
      end
      for (int i = 0; i < N_Y; i++) ry[i] = res[N_XL+i];
      for (int i = 0; i < N_XL; i++) begin
        checks++;
        if (x_l[i] !== rx[i]) begin failures++; $display("it=%0d x[%0d] %h exp %h", it, i, x_l[i], rx[i]); end
      end
      for (int i = 0; i < N_Y; i++) begin
        checks++;
        if (y_l[i] !== ry[i]) begin failures++; $display("it=%0d y[%0d] %h exp %h", it, i, y_l[i], ry[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
