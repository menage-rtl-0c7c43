// tb_mem_e: self-checking test of the event memory FIFO.
// Fills it to full (checks in_ready drops at DEPTH), checks order, count, and a
// simultaneous write/pop, against a queue model kept in the testbench.
module tb_mem_e;
  localparam int DEPTH = 8, EVT_W = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, pop = 0;
  logic [EVT_W:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [EVT_W:0] model[$];

  mem_e #(.DEPTH(DEPTH), .EVT_W(EVT_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!out_valid && in_ready && count == 0, "empty after reset");
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_data = (EVT_W+1)'($urandom);
      model.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
    chk(!in_ready, "full after DEPTH writes");
    chk(count == DEPTH, "count == DEPTH");
    // write while full is dropped
    in_valid = 1; in_data = '1; @(negedge clk); in_valid = 0;
    chk(count == DEPTH, "write when full ignored");
    // drain half
    for (int i = 0; i < DEPTH/2; i++) begin
      chk(out_valid && out_data == model.pop_front(), $sformatf("order %0d", i));
      pop = 1; @(negedge clk); pop = 0;
    end
    // simultaneous write and pop for a while
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; in_data = (EVT_W+1)'($urandom); pop = 1;
      chk(out_data == model[0], $sformatf("concurrent head %0d", i));
      void'(model.pop_front()); model.push_back(in_data);
      @(negedge clk);
      chk(count == DEPTH/2, "count constant with write+pop");
    end
    in_valid = 0; pop = 0;
    while (model.size() > 0) begin
      chk(out_valid && out_data == model.pop_front(), "drain order");
      pop = 1; @(negedge clk); pop = 0;
    end
    chk(!out_valid && count == 0, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
