// tb_topo_match: loads a pattern table (some entries invalid, one pattern
// stored twice) and checks the topology index for matching and unmatched
// device vectors: lowest matching entry wins, a miss keeps the old index.
module tb_topo_match;
  import imex_pkg::*;
  localparam int N_SW = 28, N_TOPO = 16;
  logic clk = 0, rst_n = 0, sample = 0, miss;
  cfg_wr_t cfg;
  logic [N_SW-1:0] sw_state;
  logic [3:0] topo;
  int checks = 0, failures = 0;
  bit [N_SW-1:0] pat [N_TOPO];
  bit vld [N_TOPO];

  topo_match #(.N_SW(N_SW), .N_TOPO(N_TOPO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
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
    int exp_k = 0, nmiss = 0, nhit = 0;
    cfg = '0; sw_state = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < N_TOPO; t++) begin
      pat[t] = N_SW'({$urandom});
      vld[t] = (t % 5) != 4;
    end
    pat[9] = pat[3];  // duplicate: entry 3 must win
    for (int t = 0; t < N_TOPO; t++) wr({4'h1, 8'(t), 20'h0}, {vld[t], 35'h0, pat[t]});
    for (int it = 0; it < 400; it++) begin
      int pick, e;
      bit hit;
      pick = $urandom_range(0, N_TOPO);
      sw_state = (pick == N_TOPO) ? N_SW'({$urandom}) : pat[pick];
      hit = 0; e = 0;
      for (int t = N_TOPO - 1; t >= 0; t--) if (vld[t] && pat[t] == sw_state) begin hit = 1; e = t; end
      if (hit) exp_k = e;
      @(negedge clk) sample = 1;
      @(negedge clk) sample = 0;
      checks += 2;
      if (topo !== 4'(exp_k)) begin failures++; $display("it=%0d topo %0d exp %0d", it, topo, exp_k); end
      if (miss !== !hit) begin failures++; $display("it=%0d miss %0d", it, miss); end
      if (hit) nhit++; else nmiss++;
    end
    checks += 2;
    if (nhit == 0 || nmiss == 0) failures++;
    if (pat[9] != pat[3]) failures++;
    $display("hits=%0d misses=%0d", nhit, nmiss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
