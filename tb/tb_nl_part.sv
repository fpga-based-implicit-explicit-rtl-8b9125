// tb_nl_part: checks the NL output eq. (2) (y_nl = M^-1 x_nl, 3-cycle
// latency) and the explicit steps eq. (6) and (8) against a reference model
// that keeps its own fluxes and stage-1 base, over many alternating stages.
module tb_nl_part;
  import imex_pkg::*;
  logic clk = 0, rst_n = 0, out_start = 0, out_done, step = 0, stage2 = 0;
  fx_t g [3][3];
  fx_t y_l [3];
  fx_t h_half, h_full;
  fx_t x_nl [3];
  fx_t y_nl [3];
  longint rx [3], rb [3];
  int checks = 0, failures = 0;

  nl_part dut (.*);
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
  function automatic longint mul(longint a, longint b);
    return sat((128'(a) * 128'(b)) >>> 40);
  endfunction

  initial begin
    h_full = 64'sd82463372083;   // 0.075
    h_half = 64'sd41231686041;   // 0.0375
    for (int i = 0; i < 3; i++) begin rx[i] = 0; rb[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      longint ey [3];
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++)
        g[r][c] = fx_t'($signed($urandom_range(0, 2**24)) - 2**23) <<< 12;
      for (int i = 0; i < 3; i++) y_l[i] = fx_t'($signed($urandom_range(0, 6000)) - 3000) <<< 40;
      for (int r = 0; r < 3; r++) begin
        logic signed [127:0] acc;
        acc = 0;
        for (int c = 0; c < 3; c++) acc += (128'(g[r][c]) * 128'(rx[c])) >>> 40;
        ey[r] = sat(acc);
      end
      @(negedge clk) out_start = 1;
      @(negedge clk) out_start = 0;
      for (int k = 0; k < 1; k++) begin
        @(negedge clk);
        checks++;
        if (out_done) begin failures++; $display("out_done early"); end
      end
      @(negedge clk);
      checks++;
      if (!out_done) begin failures++; $display("it=%0d out_done missing", it); end
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (y_nl[i] !== ey[i]) begin failures++; $display("it=%0d y[%0d] %h exp %h", it, i, y_nl[i], ey[i]); end
      end
      stage2 = it[0];
      @(negedge clk) step = 1;
      @(negedge clk) step = 0;
      for (int i = 0; i < 3; i++) begin
        if (!it[0]) begin rb[i] = rx[i]; rx[i] = sat(128'(rx[i]) + 128'(mul(h_half, y_l[i]))); end
        else rx[i] = sat(128'(rb[i]) + 128'(mul(h_full, y_l[i])));
        checks++;
        if (x_nl[i] !== rx[i]) begin failures++; $display("it=%0d x[%0d] %h exp %h", it, i, x_nl[i], rx[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
