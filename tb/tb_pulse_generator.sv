// tb_pulse_generator: drives random MEM_S&N rows and checks that, one cycle
// later, exactly the lanes with NI set pulse, with their own VNI/WI, and that no
// pulse follows an invalid row.
module tb_pulse_generator;
  localparam int M = 6, N = 8, K = 32, V_W = 8, VREF = 255;
  localparam int VW = $clog2(N), WW = $clog2(K);
  logic clk = 0, rst_n = 0, row_valid = 0;
  logic [M-1:0] ni = '0, pulse;
  logic [M-1:0][VW-1:0] vni = '0, p_vni;
  logic [M-1:0][WW-1:0] wi = '0, p_wi;
  logic [V_W-1:0] amp;
  int checks = 0, failures = 0;

  pulse_generator #(.M(M), .N(N), .K(K), .V_W(V_W), .VREF(VREF)) dut (.*);
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
    for (int t = 0; t < 200; t++) begin
      logic [M-1:0] e_ni;
      logic [M-1:0][VW-1:0] e_vni;
      logic [M-1:0][WW-1:0] e_wi;
      logic v;
      v = ($urandom_range(3) != 0);
      e_ni = M'($urandom); e_vni = (M*VW)'({$urandom, $urandom}); e_wi = (M*WW)'({$urandom, $urandom});
      row_valid = v; ni = e_ni; vni = e_vni; wi = e_wi;
      @(negedge clk);
      row_valid = 0; ni = '1;
      checks++;
      if (pulse != (v ? e_ni : '0)) begin failures++; $display("FAIL pulse %b exp %b", pulse, v ? e_ni : '0); end
      checks++;
      if (amp != V_W'(VREF)) begin failures++; $display("FAIL amp"); end
      if (v) for (int j = 0; j < M; j++) if (e_ni[j]) begin
        checks++;
        if (p_vni[j] != e_vni[j] || p_wi[j] != e_wi[j]) begin failures++; $display("FAIL lane %0d", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
