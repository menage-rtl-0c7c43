// tb_a_syn: loads random weights, sends pulses with random weight rows and
// amplitudes, and checks the scaled pulse (amp*w >> 8), its virtual neuron
// index and the one-cycle latency.
module tb_a_syn;
  localparam int K = 64, WB = 8, N = 8, V_W = 8;
  localparam int VW = $clog2(N), WW = $clog2(K);
  logic clk = 0, rst_n = 0;
  logic we = 0, pulse = 0, out_valid;
  logic [WW-1:0] waddr = '0, wi = '0;
  logic [WB-1:0] wdata = '0;
  logic [V_W-1:0] amp = '0, vout;
  logic [VW-1:0] vni = '0, out_vni;
  int wmem [K];
  int checks = 0, failures = 0;

  a_syn #(.K(K), .WB(WB), .N(N), .V_W(V_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < K; i++) begin
      wmem[i] = $urandom_range(255);
      we = 1; waddr = WW'(i); wdata = WB'(wmem[i]);
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 300; t++) begin
      int r, a, k;
      bit p;
      p = $urandom_range(1); r = $urandom_range(K-1); a = $urandom_range(255); k = $urandom_range(N-1);
      pulse = p; wi = WW'(r); amp = V_W'(a); vni = VW'(k);
      @(negedge clk);
      pulse = 0;
      checks++;
      if (out_valid != p) begin failures++; $display("FAIL valid"); end
      if (p) begin
        checks++;
        if (int'(vout) != (a * wmem[r]) / 256 || int'(out_vni) != k) begin
          failures++; $display("FAIL row %0d amp %0d: vout %0d exp %0d", r, a, vout, (a * wmem[r]) / 256);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
