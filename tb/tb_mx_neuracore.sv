// tb_mx_neuracore: one core with 4 A-Neurons of 4 virtual neurons.
// Phase 1 (rate): ten events of two MEM_S&N rows each, then a marker; zero
//   weights so nothing fires. The controller must take B+2 = 4 cycles per event
//   and leak exactly 4*10+4 cycles after the first pop (the marker waits for the
//   last row's pulses to pass the A-Syns), then forward the marker.
// Phase 2 (latency and values): one event whose single row pulses lanes 0 and 2
//   with full-scale weights; each must fire on the second event. The first output
//   event must appear 7 cycles after the pop, and carry the slot-table indices.
// Phase 3 (leak): a sub-threshold charge is leaked by a marker, so one more
//   pulse that would have fired without the leak must not fire.
module tb_mx_neuracore;
  import menage_pkg::*;
  localparam int M = 4, N = 4, K = 16, EVT_W = 6, SND = 32, E2A = 64, B_W = 4;
  localparam int VW = $clog2(N), WW = $clog2(K), AW = $clog2(SND);
  localparam int ROW_W = M + M*VW + M*WW;
  localparam int CFG_AW = (AW > WW) ? ((AW > EVT_W) ? AW : EVT_W) : ((WW > EVT_W) ? WW : EVT_W);
  localparam int CFG_DW = (ROW_W > B_W + AW) ? ROW_W : B_W + AW;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, cfg_we = 0, leak_o, stall_o;
  logic [EVT_W:0] in_data = '0, out_data;
  cfg_sel_e cfg_sel = CFG_E2A;
  logic [$clog2(M)-1:0] cfg_idx = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  ctrl_state_e ctrl_state;
  int checks = 0, failures = 0, cyc = 0, first_pop = -1, leak_cyc = -1, out_cyc = -1;
  int outs[$];

  mx_neuracore #(.M(M), .N(N), .K(K), .EVT_W(EVT_W), .MEME_DEPTH(16), .E2A_DEPTH(E2A),
                 .SN_DEPTH(SND), .B_W(B_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic cfg(input cfg_sel_e sel, input int idx, input int addr, input logic [CFG_DW-1:0] data);
    cfg_we = 1; cfg_sel = sel; cfg_idx = ($clog2(M))'(idx); cfg_addr = CFG_AW'(addr); cfg_wdata = data;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic send(input logic [EVT_W:0] d);
    in_valid = 1; in_data = d;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask
  function automatic logic [CFG_DW-1:0] row(input int ni, input int vn, input int w);
    logic [CFG_DW-1:0] r;
    r = '0;
    for (int j = 0; j < M; j++) begin
      r[j] = ni[j];
      r[M + j*VW +: VW] = VW'(vn);
      r[M + M*VW + j*WW +: WW] = WW'(w);
    end
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.ev_pop && first_pop < 0) first_pop = cyc;
    if (rst_n && leak_o && leak_cyc < 0) leak_cyc = cyc;
    if (rst_n && out_valid && out_ready) begin outs.push_back(int'(out_data)); if (out_cyc < 0) out_cyc = cyc; end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg(CFG_VTH, 0, 0, CFG_DW'(300));
    for (int j = 0; j < M; j++) begin
      cfg(CFG_WEIGHT, j, 0, '0);    // weight row 0: zero
      cfg(CFG_WEIGHT, j, 1, 8'd255);  // weight row 1: full scale -> 254 per pulse
    end
    for (int s = 0; s < M*N; s++) cfg(CFG_SLOT, 0, s, CFG_DW'(40 + s));
    cfg(CFG_SN, 0, 4, row(4'b1111, 1, 0));
    cfg(CFG_SN, 0, 5, row(4'b1111, 2, 0));
    cfg(CFG_SN, 0, 6, row(4'b0101, 3, 1));
    for (int i = 0; i < 10; i++) cfg(CFG_E2A, 0, i, CFG_DW'((2 << AW) | 4));
    cfg(CFG_E2A, 0, 20, CFG_DW'((1 << AW) | 6));
    // phase 1: fill the event memory first, then let the controller run
    force dut.u_ctrl.ev_valid = 1'b0;
    for (int i = 0; i < 10; i++) send({1'b0, EVT_W'(i)});
    send({1'b1, {EVT_W{1'b0}}});
    release dut.u_ctrl.ev_valid;
    first_pop = -1; leak_cyc = -1;
    repeat (80) @(negedge clk);
    chk(leak_cyc - first_pop == 44, $sformatf("leak %0d cycles after first pop, expected 44", leak_cyc - first_pop));
    chk(outs.size() == 1 && outs[0] == (1 << EVT_W), "only a marker after phase 1");
    // phase 2: two pulses of 254 on lanes 0 and 2, virtual neuron 3, threshold 300
    outs = {}; out_cyc = -1;
    send({1'b0, 6'd20});
    repeat (12) @(negedge clk);
    chk(outs.size() == 0, "no fire after one pulse");
    first_pop = -1; out_cyc = -1;
    send({1'b0, 6'd20});
    repeat (12) @(negedge clk);
    chk(out_cyc - first_pop == 7, $sformatf("output %0d cycles after pop, expected 7", out_cyc - first_pop));
    chk(outs.size() == 2 && outs[0] == 40 + 0*N + 3 && outs[1] == 40 + 2*N + 3, "fired slot indices");
    // phase 3: 254, leak to 223, +254 = 477 >= 300 fires; with threshold 480 it must not
    cfg(CFG_VTH, 0, 0, CFG_DW'(480));
    outs = {};
    send({1'b0, 6'd20});
    send({1'b1, {EVT_W{1'b0}}});
    repeat (20) @(negedge clk);
    chk(dut.g_lane[0].u_neu.vmem[3] == 12'd223, $sformatf("leaked potential %0d, expected 223", dut.g_lane[0].u_neu.vmem[3]));
    send({1'b0, 6'd20});
    repeat (12) @(negedge clk);
    chk(outs.size() == 1 && outs[0] == (1 << EVT_W), "no fire after leak");
    chk(dut.g_lane[2].u_neu.vmem[3] == 12'd477, "integrated after leak");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
