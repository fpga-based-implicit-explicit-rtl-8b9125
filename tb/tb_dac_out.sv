// tb_dac_out: configures the four channels with random variable indices and
// shifts, presents random monitor vectors and checks the 16-bit samples and
// clip flags (arithmetic shift, then saturation to [-32768, 32767]) and that
// samples hold between update pulses.
module tb_dac_out;
  import imex_pkg::*;
  localparam int N_MON = 22, N_CH = 4;
  logic clk = 0, rst_n = 0, update = 0;
  cfg_wr_t cfg;
  fx_t mon [N_MON];
  logic [15:0] dac [N_CH];
  logic [N_CH-1:0] clip;
  int checks = 0, failures = 0;
  int sel [N_CH], sh [N_CH];

  dac_out #(.N_MON(N_MON), .N_CH(N_CH)) dut (.*);
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
    int nclip = 0, nfit = 0;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      if (it % 20 == 0)
        for (int ch = 0; ch < N_CH; ch++) begin
          sel[ch] = $urandom_range(0, N_MON);  // N_MON reads as zero
          sh[ch]  = $urandom_range(30, 50);
          wr({4'h5, 26'h0, 2'(ch)}, {50'h0, 6'(sh[ch]), 8'(sel[ch])});
        end
      for (int i = 0; i < N_MON; i++) mon[i] = fx_t'({$urandom, $urandom}) >>> $urandom_range(8, 30);
      @(negedge clk) update = 1;
      @(negedge clk) update = 0;
      for (int ch = 0; ch < N_CH; ch++) begin
        longint v;
        logic [15:0] e;
        bit ec;
        v = (sel[ch] < N_MON) ? (longint'(mon[sel[ch]]) >>> sh[ch]) : 0;
        if (v > 32767) begin e = 16'h7fff; ec = 1; end
        else if (v < -32768) begin e = 16'h8000; ec = 1; end
        else begin e = v[15:0]; ec = 0; end
        if (ec) nclip++; else nfit++;
        checks += 2;
        if (dac[ch] !== e) begin failures++; $display("it=%0d ch=%0d got %h exp %h", it, ch, dac[ch], e); end
        if (clip[ch] !== ec) failures++;
      end
      // no update: samples hold
      for (int i = 0; i < N_MON; i++) mon[i] = ~mon[i];
      @(negedge clk);
      checks++;
      begin
        logic [15:0] d0;
        d0 = dac[0];
        @(negedge clk);
        if (dac[0] !== d0) failures++;
      end
    end
    checks++;
    if (nclip == 0 || nfit == 0) failures++;
    $display("clipped=%0d fitted=%0d", nclip, nfit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
