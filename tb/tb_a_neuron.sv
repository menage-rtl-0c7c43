// tb_a_neuron: random pulses, leaks and clears on an A-Neuron, checked against
// an integer LIF reference model kept in the testbench: potential += input
// (saturating), fire and reset to 0 at or above threshold, leak v -= v>>3.
// Checks spike, spike index and every stored potential after each cycle, and
// counts fires, leaks and saturations.
module tb_a_neuron;
  localparam int N = 8, V_W = 8, MEM_W = 10, LS = 3;
  localparam int VW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, leak = 0, clr = 0, spike;
  logic [VW-1:0] in_vni = '0, clr_vni = '0, spike_vni;
  logic [V_W-1:0] in_v = '0;
  logic [MEM_W-1:0] vth;
  logic [N-1:0][MEM_W-1:0] vmem;
  int ref_v [N];
  int checks = 0, failures = 0, fires = 0, leaks = 0, sats = 0;

  a_neuron #(.N(N), .V_W(V_W), .MEM_W(MEM_W), .LEAK_SHIFT(LS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) ref_v[k] = 0;
    vth = 10'd112;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int op, k, x, e_spk, e_idx;
      op = $urandom_range(9);
      k  = $urandom_range(N-1);
      x  = $urandom_range(255);
      if (t == 1500) vth = 10'd1000;          // high threshold: reach saturation
      in_valid = (op < 8); in_vni = VW'(k); in_v = V_W'(x);
      leak = (op == 8);
      clr  = (op == 9); clr_vni = VW'(k);
      e_spk = 0; e_idx = -1;
      if (op < 8) begin
        int s;
        s = ref_v[k] + x;
        if (s > 1023) begin s = 1023; sats++; end
        if (s >= vth) begin e_spk = 1; e_idx = k; ref_v[k] = 0; fires++; end
        else ref_v[k] = s;
      end else if (op == 8) begin
        for (int i = 0; i < N; i++) ref_v[i] = ref_v[i] - (ref_v[i] >> LS);
        leaks++;
      end else begin
        ref_v[k] = 0;
      end
      @(negedge clk);
      in_valid = 0; leak = 0; clr = 0;
      checks++;
      if (spike != e_spk[0] || (e_spk && int'(spike_vni) != e_idx)) begin
        failures++; $display("FAIL t=%0d spike %0d exp %0d", t, spike, e_spk);
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(vmem[i]) != ref_v[i]) begin failures++; $display("FAIL t=%0d v[%0d]=%0d exp %0d", t, i, vmem[i], ref_v[i]); end
      end
    end
    checks++;
    if (fires == 0 || leaks == 0 || sats == 0) begin failures++; $display("FAIL: mechanism not exercised"); end
    $display("fires=%0d leaks=%0d saturations=%0d", fires, leaks, sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
