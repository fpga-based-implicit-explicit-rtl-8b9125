// tb_mvm_unit: checks the row-parallel matrix-vector multiplier against a
// 128-bit reference computed here: each product is shifted right by 40 bits
// (floor), the row sum is saturated to 64 bits. Random operands of several
// magnitudes, one overflowing row, and the 2-cycle latency are checked.
module tb_mvm_unit;
  import imex_pkg::*;
  localparam int M = 15, N = 16;
  logic clk = 0, rst_n = 0, start = 0, done;
  fx_t mat [M][N];
  fx_t vec [N];
  fx_t res [M];
  int checks = 0, failures = 0;

  mvm_unit #(.M(M), .N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t rnd(int sh);
    logic signed [63:0] v;
    v = {$urandom, $urandom};
    return v >>> sh;
  endfunction

  function automatic fx_t ref_row(int r);
    logic signed [127:0] acc, p;
    acc = 0;
    for (int c = 0; c < N; c++) begin
      p = $signed({{64{mat[r][c][63]}}, mat[r][c]}) * $signed({{64{vec[c][63]}}, vec[c]});
      acc = acc + (p >>> 40);
    end
    if (acc > 128'sh7fffffffffffffff) return 64'h7fffffffffffffff;
    if (acc < -128'sh8000000000000000) return 64'h8000000000000000;
    return acc[63:0];
  endfunction

  initial begin
    fx_t expv [M];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int sh;
      sh = (t % 4 == 0) ? 30 : 20 + (t % 10);
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) mat[r][c] = rnd(sh);
      for (int c = 0; c < N; c++) vec[c] = rnd(sh);
      if (t == 5) begin  // force saturation in row 0
        for (int c = 0; c < N; c++) begin mat[0][c] = 64'sd1 <<< 62; vec[c] = 64'sd1 <<< 50; end
      end
      for (int r = 0; r < M; r++) expv[r] = ref_row(r);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      checks++;
      if (done) begin failures++; $display("done too early"); end
      @(negedge clk);
      checks++;
      if (!done) begin failures++; $display("done not at 2 cycles"); end
      for (int r = 0; r < M; r++) begin
        checks++;
        if (res[r] !== expv[r]) begin
          failures++;
          $display("t=%0d row %0d got %h exp %h", t, r, res[r], expv[r]);
        end
      end
      if (t == 5) begin checks++; if (res[0] != 64'h7fffffffffffffff) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
