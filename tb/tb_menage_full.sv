// tb_menage_full: end-to-end run of the MENAGE top at its default size
// (5 cores, 20 A-Neurons of 32 virtual neurons, 1 MiB of weights per A-Syn,
// 2^20-row MEM_S&N, 2^16-row MEM_E2A, 256-entry event memories).
//
// Only a sparse part of each memory is programmed: 48 source neurons per core,
// 96 MEM_S&N rows spread over the whole address range, weights at random rows
// anywhere in each 1 MiB SRAM. Four time steps of rate-coded events are sent
// through the chain with random output back-pressure. As in tb_menage_top, a
// reference LIF model recomputes every core's output stream per time step from
// the stream it received, and each mechanism must have occurred.
module tb_menage_full;
  import menage_pkg::*;
  localparam int NC = 5, M = 20, N = 32, K = 1048576, EVT_W = 16, E2A = 65536, SND = 1048576, B_W = 8;
  localparam int VW = $clog2(N), WW = $clog2(K), AW = $clog2(SND);
  localparam int ROW_W = M + M*VW + M*WW;
  localparam int CFG_AW = (AW > WW) ? ((AW > EVT_W) ? AW : EVT_W) : ((WW > EVT_W) ? WW : EVT_W);
  localparam int CFG_DW = (ROW_W > B_W + AW) ? ROW_W : B_W + AW;
  localparam int STEPS = 4, NSRC = 48, NROWS = 96;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [EVT_W:0] in_data = '0, out_data;
  logic cfg_we = 0;
  logic [$clog2(NC)-1:0] cfg_core = '0;
  cfg_sel_e cfg_sel = CFG_E2A;
  logic [$clog2(M)-1:0] cfg_idx = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic [NC-1:0] leak_o, stall_o;

  menage_top dut (.*);
  always #5 clk = ~clk;

  // network image
  int e2a_b [NC][int], e2a_a [NC][int];
  int sn_ni [NC][int][M], sn_vni [NC][int][M], sn_wi [NC][int][M];
  int wt [NC][M][int];
  int src [NC][NSRC];     // source-neuron indices used by core c
  int rows [NC][NROWS];   // MEM_S&N rows used by core c
  int smap [NC][M*N];
  int vth [NC];
  // observed link streams
  int link [NC+1][$];
  int checks = 0, failures = 0;
  int n_multi = 0, n_zero = 0, n_fire = 0, n_leak = 0, n_stall = 0, n_full = 0, n_sat = 0, n_clr = 0, n_bp = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(input int core, input cfg_sel_e sel, input int idx, input int addr, input logic [CFG_DW-1:0] data);
    cfg_we = 1; cfg_core = ($clog2(NC))'(core); cfg_sel = sel; cfg_idx = ($clog2(M))'(idx);
    cfg_addr = CFG_AW'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // link monitors
  for (genvar i = 0; i < NC; i++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.l_valid[i] && dut.l_ready[i]) link[i].push_back(int'(dut.l_data[i]));
  end
  // the last link is observed at the top's own output port
  always @(posedge clk) if (rst_n && out_valid && out_ready) link[NC].push_back(int'(out_data));
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NC; i++) begin
      if (leak_o[i]) n_leak++;
      if (stall_o[i]) n_stall++;
      if (!dut.l_ready[i]) n_full++;
    end
    if (out_valid && !out_ready) n_bp++;
  end

  // reference for one core fed with the stream it received
  task automatic ref_core(input int c, input int in_s[$], output int exp_s[$]);
    int v [M][N];
    int step_out[$];
    foreach (v[j, k]) v[j][k] = 0;
    exp_s = {};
    foreach (in_s[n]) begin
      int e;
      e = in_s[n];
      if (e >> EVT_W) begin
        for (int j = 0; j < M; j++) for (int k = 0; k < N; k++) v[j][k] -= v[j][k] >> 3;
        step_out.sort();
        foreach (step_out[q]) exp_s.push_back(step_out[q]);
        exp_s.push_back(1 << EVT_W);
        step_out = {};
      end else begin
        if (!e2a_b[c].exists(e)) begin failures++; $display("FAIL: unmapped event %0d at core %0d", e, c); continue; end
        if (e2a_b[c][e] > 1) n_multi++;
        if (e2a_b[c][e] == 0) n_zero++;
        for (int r = 0; r < e2a_b[c][e]; r++) begin
          int row;
          row = e2a_a[c][e] + r;
          for (int j = 0; j < M; j++) if (sn_ni[c][row][j]) begin
            int k, s;
            k = sn_vni[c][row][j];
            s = v[j][k] + (255 * wt[c][j][sn_wi[c][row][j]]) / 256;
            if (s > 4095) begin s = 4095; n_sat++; end
            if (s >= vth[c]) begin step_out.push_back(smap[c][j*N + k]); v[j][k] = 0; n_fire++; end
            else v[j][k] = s;
          end
        end
      end
    end
  endtask

  // sort a link stream within each step so it can be compared as multisets
  function automatic void canon(input int s[$], output int o[$]);
    int part[$];
    o = {};
    foreach (s[n]) begin
      if (s[n] >> EVT_W) begin part.sort(); foreach (part[q]) o.push_back(part[q]); o.push_back(s[n]); part = {}; end
      else part.push_back(s[n]);
    end
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      vth[c] = (c == NC-1) ? 4000 : 150 + 60 * c;   // last core: high threshold to reach saturation
      cfg(c, CFG_VTH, 0, 0, CFG_DW'(vth[c]));
      // source neurons: core 0 takes camera pixels, later cores the slot indices of the previous core
      for (int i = 0; i < NSRC; i++) src[c][i] = (c == 0) ? i * 1361 + 7 : ((i * 5 + c - 1) * 997) % E2A;
      for (int r = 0; r < NROWS; r += 4) rows[c][r] = $urandom_range(SND / 4 - 1) * 4;
      for (int i = 0; i < NSRC; i++) begin
        int base;
        base = rows[c][(i % (NROWS / 4)) * 4];
        e2a_b[c][src[c][i]] = (i % 12 == 0) ? 0 : $urandom_range(1, 4);
        e2a_a[c][src[c][i]] = base;
        cfg(c, CFG_E2A, 0, src[c][i], CFG_DW'((longint'(e2a_b[c][src[c][i]]) << AW) | base));
      end
      for (int g = 0; g < NROWS / 4; g++) for (int r = 0; r < 4; r++) begin
        logic [CFG_DW-1:0] rw;
        int ra;
        ra = rows[c][g * 4] + r;
        rw = '0;
        for (int j = 0; j < M; j++) begin
          sn_ni[c][ra][j] = ($urandom_range(3) == 0); sn_vni[c][ra][j] = $urandom_range(N-1);
          sn_wi[c][ra][j] = $urandom_range(K-1);
          rw[j] = sn_ni[c][ra][j][0];
          rw[M + j*VW +: VW] = VW'(sn_vni[c][ra][j]);
          rw[M + M*VW + j*WW +: WW] = WW'(sn_wi[c][ra][j]);
          if (sn_ni[c][ra][j]) begin
            wt[c][j][sn_wi[c][ra][j]] = $urandom_range(255);
            cfg(c, CFG_WEIGHT, j, sn_wi[c][ra][j], CFG_DW'(wt[c][j][sn_wi[c][ra][j]]));
          end
        end
        cfg(c, CFG_SN, 0, ra, rw);
      end
      for (int s = 0; s < M*N; s++) begin
        smap[c][s] = ((s % NSRC) * 5 + c) * 997 % E2A;
        cfg(c, CFG_SLOT, 0, s, CFG_DW'(smap[c][s]));
        n_clr++;
      end
    end
    // input stream: STEPS time steps of rate-coded events, random back-pressure at the output
    fork
      begin
        for (int t = 0; t < STEPS; t++) begin
          int ne;
          ne = $urandom_range(20, 60);
          for (int e = 0; e <= ne; e++) begin
            in_valid = 1;
            in_data  = (e == ne) ? {1'b1, {EVT_W{1'b0}}} : {1'b0, EVT_W'(src[0][$urandom_range(NSRC-1)])};
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
            in_valid = 0;
          end
        end
      end
      begin
        while (link[NC].size() == 0 || link[NC][link[NC].size()-1] != (1 << EVT_W) || count_marks(link[NC]) < STEPS) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
        end
        out_ready = 1;
      end
    join
    repeat (20) @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      int e[$], g[$];
      ref_core(c, link[c], e);
      canon(link[c+1], g);
      chk(e.size() == g.size(), $sformatf("core %0d: %0d events, expected %0d", c, g.size(), e.size()));
      foreach (e[n]) if (n < g.size()) chk(e[n] == g[n], $sformatf("core %0d event %0d: %0d exp %0d", c, n, g[n], e[n]));
      $display("core %0d: %0d in, %0d out", c, link[c].size(), link[c+1].size());
    end
    chk(n_multi > 0, "multi-row dispatch"); chk(n_zero > 0, "event with no rows");
    chk(n_fire > 0, "fires"); chk(n_leak == NC * STEPS, "one leak per core and step");
    chk(n_stall > 0, "event generator stall"); chk(n_full > 0, "event memory full");
    chk(n_sat > 0, "saturation"); chk(n_bp > 0, "output back-pressure"); chk(n_clr > 0, "slot clears");
    $display("multi=%0d zero=%0d fires=%0d leaks=%0d stall=%0d full=%0d sat=%0d bp=%0d clr=%0d",
             n_multi, n_zero, n_fire, n_leak, n_stall, n_full, n_sat, n_bp, n_clr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int count_marks(input int s[$]);
    int n = 0;
    foreach (s[i]) if (s[i] >> EVT_W) n++;
    return n;
  endfunction
endmodule
