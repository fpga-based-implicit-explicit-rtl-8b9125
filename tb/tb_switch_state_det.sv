// tb_switch_state_det: random configurations, gate patterns and variable
// values; the expected device states are computed by a separate model of
// the three rules (gate on; still conducting with positive current; forward
// voltage above threshold) that keeps its own copy of the previous states.
module tb_switch_state_det;
  import imex_pkg::*;
  localparam int N_SW = 28, NV = 16;
  logic clk = 0, rst_n = 0, sample = 0, changed;
  cfg_wr_t cfg;
  logic [N_SW-1:0] gate, sw_state;
  fx_t vars [NV];
  int checks = 0, failures = 0;
  int unsigned m_iidx [N_SW], m_vidx [N_SW];
  bit m_ineg [N_SW], m_vneg [N_SW], m_ien [N_SW], m_ven [N_SW];
  longint m_vth [N_SW];
  bit [N_SW-1:0] m_state;

  switch_state_det #(.N_SW(N_SW), .NV(NV)) dut (.*);
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

  function automatic longint val(int unsigned idx, bit neg);
    longint s;
    s = (idx < NV) ? longint'(vars[idx]) : 0;
    return neg ? -s : s;
  endfunction

  initial begin
    int nchg = 0, ncur = 0, nvolt = 0;
    cfg = '0; gate = '0;
    for (int i = 0; i < NV; i++) vars[i] = 0;
    m_state = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < N_SW; d++) begin
      m_iidx[d] = $urandom_range(0, NV);  // NV = out of range -> zero
      m_vidx[d] = $urandom_range(0, NV - 1);
      m_ineg[d] = $urandom_range(0, 1);
      m_vneg[d] = $urandom_range(0, 1);
      m_ien[d]  = (d % 3) != 0;
      m_ven[d]  = (d % 4) != 1;
      m_vth[d]  = longint'($urandom_range(0, 3)) <<< 40;
      wr({4'h4, 12'h0, 8'(d), 8'h00}, {44'h0, 8'(m_iidx[d]), m_ineg[d], 8'(m_vidx[d]), m_vneg[d], m_ven[d], m_ien[d]});
      wr({4'h4, 12'h0, 8'(d), 8'h01}, m_vth[d]);
    end
    wr({4'h4, 12'h0, 8'd200, 8'h00}, 64'hfffff);  // out-of-range device: ignored
    for (int t = 0; t < 300; t++) begin
      bit [N_SW-1:0] nxt;
      gate = (t % 5 == 0) ? N_SW'({$urandom}) : '0;
      for (int i = 0; i < NV; i++) vars[i] = fx_t'($signed($urandom_range(0, 8)) - 4) <<< 40;
      for (int d = 0; d < N_SW; d++) begin
        bit oc, ov;
        oc = m_ien[d] && m_state[d] && (val(m_iidx[d], m_ineg[d]) > 0);
        ov = m_ven[d] && (val(m_vidx[d], m_vneg[d]) > m_vth[d]);
        nxt[d] = gate[d] | oc | ov;
        if (oc && !gate[d]) ncur++;
        if (ov && !gate[d]) nvolt++;
      end
      @(negedge clk) sample = 1;
      @(negedge clk) sample = 0;
      checks += 2;
      if (sw_state !== nxt) begin failures++; $display("t=%0d got %h exp %h", t, sw_state, nxt); end
      if (changed !== (nxt != m_state)) begin failures++; $display("t=%0d changed wrong", t); end
      if (nxt != m_state) nchg++;
      m_state = nxt;
      // holds without sample
      gate = ~gate;
      @(negedge clk);
      checks++;
      if (sw_state !== m_state || changed) failures++;
    end
    checks += 3;
    if (nchg == 0) failures++;
    if (ncur == 0) failures++;
    if (nvolt == 0) failures++;
    $display("changes=%0d current-held=%0d voltage-on=%0d", nchg, ncur, nvolt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
