// tb_event_generator: random spikes from M A-Neurons with random back-pressure.
// Checks that every spike leaves exactly once as the neuron index its slot maps
// to, that the lowest A-Neuron is served first within a cycle's spikes, that
// stall follows queue occupancy, and that a step marker comes out after the
// queues drained and before later spikes.
module tb_event_generator;
  localparam int M = 4, N = 4, EVT_W = 8;
  localparam int VW = $clog2(N), SW = $clog2(M*N);
  logic clk = 0, rst_n = 0;
  logic [M-1:0] spike = '0;
  logic [M-1:0][VW-1:0] spike_vni = '0;
  logic map_we = 0, mark_req = 0, out_valid, out_ready = 0, stall, empty;
  logic [SW-1:0] map_addr = '0;
  logic [EVT_W-1:0] map_wdata = '0;
  logic [EVT_W:0] out_data;
  int map [M*N];
  int exp_q [M][$];
  int checks = 0, failures = 0, got = 0, sent = 0, markers = 0, stalls = 0;

  event_generator #(.M(M), .N(N), .EVT_W(EVT_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor: the event must be the head of the lowest non-empty lane queue
  always @(posedge clk) if (rst_n && out_valid && out_ready && !out_data[EVT_W]) begin
    int lane;
    lane = -1;
    for (int j = M-1; j >= 0; j--) if (exp_q[j].size() > 0) lane = j;
    checks++;
    if (lane < 0 || int'(out_data[EVT_W-1:0]) != map[exp_q[lane][0]]) begin
      failures++; $display("FAIL event %0d lane %0d", out_data, lane);
    end else void'(exp_q[lane].pop_front());
    got++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < M*N; s++) begin
      map[s] = (s * 37 + 11) % 256;
      map_we = 1; map_addr = SW'(s); map_wdata = EVT_W'(map[s]);
      @(negedge clk);
    end
    map_we = 0;
    checks++; if (!empty || stall || out_valid) begin failures++; $display("FAIL idle flags"); end
    for (int round = 0; round < 4; round++) begin
      for (int t = 0; t < 40; t++) begin
        out_ready = ($urandom_range(2) != 0);
        if ((t % 8) < 2) begin
          for (int j = 0; j < M; j++) begin
            spike[j] = $urandom_range(1); spike_vni[j] = VW'($urandom);
          end
        end else spike = '0;
        @(posedge clk); #1;
        for (int j = 0; j < M; j++) if (spike[j]) begin exp_q[j].push_back(j*N + spike_vni[j]); sent++; end
        if (stall) stalls++;
        @(negedge clk);
        spike = '0;
      end
      out_ready = 1;
      while (!empty) @(negedge clk);
      checks++; if (stall) begin failures++; $display("FAIL stall while empty"); end
      mark_req = 1; @(negedge clk); mark_req = 0;
      checks++; if (!(out_valid && out_data[EVT_W])) begin failures++; $display("FAIL marker"); end
      // a spike arriving now must wait behind the marker
      spike[M-1] = 1; spike_vni[M-1] = '0;
      out_ready = 0;
      @(posedge clk); #1; exp_q[M-1].push_back((M-1)*N); sent++;
      @(negedge clk); spike = '0;
      checks++; if (!(out_valid && out_data[EVT_W])) begin failures++; $display("FAIL marker held"); end
      out_ready = 1; @(posedge clk); markers++; @(negedge clk);
    end
    out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL got %0d of %0d", got, sent); end
    checks++;
    if (stalls == 0 || markers != 4) begin failures++; $display("FAIL mechanisms stalls=%0d markers=%0d", stalls, markers); end
    $display("events=%0d stalls=%0d markers=%0d", got, stalls, markers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
