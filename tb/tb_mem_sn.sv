// tb_mem_sn: writes rows built from random NI/VNI/WI fields into MEM_S&N and
// checks that each column comes back on its lane, one cycle after rd_en.
module tb_mem_sn;
  localparam int M = 4, N = 8, K = 64, DEPTH = 32;
  localparam int VW = $clog2(N), WW = $clog2(K), ROW_W = M + M*VW + M*WW;
  logic clk = 0, rst_n = 0;
  logic we = 0, rd_en = 0, rd_valid;
  logic [$clog2(DEPTH)-1:0] waddr = '0, rd_addr = '0;
  logic [ROW_W-1:0] wdata = '0;
  logic [M-1:0] ni;
  logic [M-1:0][VW-1:0] vni;
  logic [M-1:0][WW-1:0] wi;
  int e_ni [DEPTH][M], e_vni [DEPTH][M], e_wi [DEPTH][M];
  int checks = 0, failures = 0;

  mem_sn #(.M(M), .N(N), .K(K), .DEPTH(DEPTH)) dut (.*);
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
    for (int r = 0; r < DEPTH; r++) begin
      logic [ROW_W-1:0] row;
      row = '0;
      for (int j = 0; j < M; j++) begin
        e_ni[r][j] = $urandom_range(1); e_vni[r][j] = $urandom_range(N-1); e_wi[r][j] = $urandom_range(K-1);
        row[j] = e_ni[r][j][0];
        row[M + j*VW +: VW] = e_vni[r][j][VW-1:0];
        row[M + M*VW + j*WW +: WW] = e_wi[r][j][WW-1:0];
      end
      we = 1; waddr = r[$clog2(DEPTH)-1:0]; wdata = row;
      @(negedge clk);
    end
    we = 0;
    checks++; if (rd_valid) begin failures++; $display("FAIL: rd_valid without read"); end
    for (int t = 0; t < 100; t++) begin
      int r;
      r = $urandom_range(DEPTH-1);
      rd_en = 1; rd_addr = r[$clog2(DEPTH)-1:0];
      @(negedge clk);
      rd_en = 0;
      checks++; if (!rd_valid) begin failures++; $display("FAIL: rd_valid"); end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (ni[j] != e_ni[r][j][0] || vni[j] != e_vni[r][j][VW-1:0] || wi[j] != e_wi[r][j][WW-1:0]) begin
          failures++; $display("FAIL row %0d lane %0d", r, j);
        end
      end
    end
    @(negedge clk);
    checks++; if (rd_valid) begin failures++; $display("FAIL: rd_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
