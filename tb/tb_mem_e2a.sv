// tb_mem_e2a: writes random {B, A} rows to MEM_E2A and reads them back,
// checking the field split and the one-cycle read latency.
module tb_mem_e2a;
  localparam int DEPTH = 64, B_W = 8, A_W = 12;
  logic clk = 0;
  logic we = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, rd_addr = '0;
  logic [B_W+A_W-1:0] wdata = '0;
  logic [B_W-1:0] b;
  logic [A_W-1:0] a;
  logic [B_W-1:0] mb [DEPTH];
  logic [A_W-1:0] ma [DEPTH];
  int checks = 0, failures = 0;

  mem_e2a #(.DEPTH(DEPTH), .B_W(B_W), .A_W(A_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      mb[i] = B_W'($urandom); ma[i] = A_W'($urandom);
      we = 1; waddr = i[$clog2(DEPTH)-1:0]; wdata = {mb[i], ma[i]};
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 200; t++) begin
      int r;
      r = $urandom_range(DEPTH-1);
      rd_en = 1; rd_addr = r[$clog2(DEPTH)-1:0];
      @(negedge clk);
      rd_en = 0; rd_addr = ~rd_addr;   // must not matter after the edge
      checks++;
      if (b !== mb[r] || a !== ma[r]) begin
        failures++; $display("FAIL row %0d: got B=%0d A=%0d exp B=%0d A=%0d", r, b, a, mb[r], ma[r]);
      end
      @(negedge clk);
      checks++;
      if (b !== mb[r]) begin failures++; $display("FAIL: output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
