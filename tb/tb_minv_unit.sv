// tb_minv_unit: for several inductance sets (in microhenry) checks that the
// published M^-1 (a) equals a bit-level reference of eq. (3) computed here
// with 128-bit integers and (b) multiplied by the inductance matrix
// [[Lp M1 M2][M1 Ls1 0][M2 0 Ls2]] gives the identity within 1e-9, using
// real arithmetic. Also checks the 103-cycle update period.
module tb_minv_unit;
  import imex_pkg::*;
  logic clk = 0, rst_n = 0, g_valid;
  fx_t ind [N_IND];
  fx_t g [3][3];
  int checks = 0, failures = 0;

  minv_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
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
  function automatic longint add(longint a, longint b);
    return sat(128'(a) + 128'(b));
  endfunction
  function automatic longint tofx(real r);
    return longint'(r * (2.0 ** 40));
  endfunction

  initial begin
    real sets [5][5] = '{'{37.0, 30.0, 30.0, 27.0, 20.0},
                         '{36.2, 29.5, 30.4, 10.0, 26.5},
                         '{25.0, 30.0, 30.0, 0.0, 0.0},
                         '{30.0, 28.0, 28.0, 26.0, 3.5},
                         '{37.0, 254.0, 254.0, 27.0, 27.0}};
    repeat (2) @(negedge clk);
    for (int k = 0; k < N_IND; k++) ind[k] = tofx(sets[0][k]);
    rst_n = 1;
    for (int s = 0; s < 5; s++) begin
      longint lp, l1, l2, m1, m2, d, q, adj [3][3];
      logic [127:0] num;
      int cyc;
      real mm [3][3], gr [3][3];
      for (int k = 0; k < N_IND; k++) ind[k] = tofx(sets[s][k]);
      lp = ind[0]; l1 = ind[1]; l2 = ind[2]; m1 = ind[3]; m2 = ind[4];
      // skip the update already in flight
      @(posedge g_valid);
      @(negedge clk);
      cyc = 0;
      do begin @(negedge clk); cyc++; end while (!g_valid);
      checks++;
      if (cyc != 103) begin failures++; $display("update period %0d", cyc); end
      d = add(add(mul(l2, mul(m1, m1)), mul(l1, mul(m2, m2))), -mul(lp, mul(l1, l2)));
      adj[0][0] = -mul(l1, l2);       adj[0][1] = mul(l2, m1);  adj[0][2] = mul(l1, m2);
      adj[1][0] = mul(l2, m1);        adj[1][1] = add(mul(m2, m2), -mul(lp, l2));
      adj[1][2] = -mul(m1, m2);       adj[2][0] = mul(l1, m2);  adj[2][1] = -mul(m1, m2);
      adj[2][2] = add(mul(m1, m1), -mul(lp, l1));
      num = 128'd1 << 100;
      q = longint'(num / 128'((d < 0) ? -d : d));
      if (d < 0) q = -q;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
        checks++;
        if (g[r][c] !== sat((128'(adj[r][c]) * 128'(q)) >>> 60)) begin
          failures++;
          $display("set %0d g[%0d][%0d] %h", s, r, c, g[r][c]);
        end
        gr[r][c] = real'(g[r][c]) / (2.0 ** 40);
      end
      mm = '{'{sets[s][0], sets[s][3], sets[s][4]},
             '{sets[s][3], sets[s][1], 0.0},
             '{sets[s][4], 0.0, sets[s][2]}};
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
        real acc;
        acc = 0.0;
        for (int k = 0; k < 3; k++) acc += mm[r][k] * gr[k][c];
        checks++;
        if ((acc - ((r == c) ? 1.0 : 0.0)) > 1e-9 || (acc - ((r == c) ? 1.0 : 0.0)) < -1e-9) begin
          failures++;
          $display("set %0d (M*Minv)[%0d][%0d] = %f", s, r, c, acc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
