// tb_event_controller: drives the controller with a queue of events and step
// markers, answers MEM_E2A lookups one cycle late from a table, and checks:
// the MEM_S&N rows read for each event are A..A+B-1 in order; no event is
// fetched while rows are outstanding; each event takes B+2 cycles when not
// stalled; stall holds row reads; a marker waits for pipe_busy to fall, gives a
// one-cycle leak, then mark_req once eg_empty is high.
module tb_event_controller;
  import menage_pkg::*;
  localparam int EVT_W = 6, B_W = 4, A_W = 8;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_pop, e2a_rd_en, sn_rd_en, leak, mark_req;
  logic [EVT_W:0] ev_data;
  logic [EVT_W-1:0] e2a_rd_addr;
  logic [B_W-1:0] e2a_b = '0;
  logic [A_W-1:0] e2a_a = '0, sn_rd_addr;
  logic stall = 0, pipe_busy = 0, eg_empty = 1;
  ctrl_state_e state_o;
  int tb_b [64], tb_a [64];
  logic [EVT_W:0] evq[$];
  int exp_rows[$];
  int checks = 0, failures = 0, leaks = 0, marks = 0, stalls = 0, multi = 0, zero = 0;
  int cyc = 0, last_pop = -1, last_b = 0;

  event_controller #(.EVT_W(EVT_W), .B_W(B_W), .A_W(A_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  assign ev_valid = (evq.size() > 0);
  assign ev_data  = ev_valid ? evq[0] : '0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // MEM_E2A model with registered read; MEM_E model; checker
  always @(posedge clk) begin
    cyc++;
    if (e2a_rd_en) begin e2a_b <= B_W'(tb_b[e2a_rd_addr]); e2a_a <= A_W'(tb_a[e2a_rd_addr]); end
    if (rst_n) begin
      if (ev_pop) begin
        chk(ev_valid, "pop on empty");
        if (!evq[0][EVT_W]) begin
          int i;
          i = int'(evq[0][EVT_W-1:0]);
          // previous neuron event must have taken B+2 cycles (no stall in that window)
          if (last_pop >= 0) chk(cyc - last_pop == last_b + 2, $sformatf("event period %0d exp %0d", cyc - last_pop, last_b + 2));
          last_pop = cyc; last_b = tb_b[i];
          for (int r = 0; r < tb_b[i]; r++) exp_rows.push_back((tb_a[i] + r) % 256);
          if (tb_b[i] > 1) multi++;
          if (tb_b[i] == 0) zero++;
        end else last_pop = -1;
        void'(evq.pop_front());
      end
      if (sn_rd_en) begin
        chk(!stall, "row read during stall");
        chk(exp_rows.size() > 0 && int'(sn_rd_addr) == exp_rows[0], "row address");
        if (exp_rows.size() > 0) void'(exp_rows.pop_front());
      end
      if (ev_pop && exp_rows.size() > 0 && !evq[0][EVT_W]) ;
      if (leak) begin
        leaks++;
        chk(!pipe_busy, "leak while pulses in flight");
        chk(exp_rows.size() == 0, "leak before rows done");
      end
      if (mark_req) begin marks++; chk(eg_empty, "mark_req while generator busy"); end
    end
  end

  // fetch rule: no pop while rows of the previous event are outstanding
  always @(posedge clk) if (rst_n && ev_pop) chk(exp_rows.size() == 0 || evq.size() == 0, "fetch during dispatch");

  initial begin
    for (int i = 0; i < 64; i++) begin tb_b[i] = $urandom_range(4); tb_a[i] = $urandom_range(255); end
    tb_b[3] = 0; tb_b[5] = 4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: no stall, check periods
    for (int e = 0; e < 40; e++) evq.push_back({1'b0, EVT_W'($urandom_range(63))});
    evq.push_back({1'b0, 6'd3}); evq.push_back({1'b0, 6'd5});
    wait (evq.size() == 0);
    repeat (8) @(negedge clk);
    chk(exp_rows.size() == 0, "all rows read");
    // phase 2: marker with pipeline busy and generator busy
    last_pop = -1;
    pipe_busy = 1; eg_empty = 0;
    evq.push_back({1'b1, 6'd0});
    repeat (6) @(negedge clk);
    chk(leaks == 0 && state_o == CS_DRAIN, "waits in drain");
    pipe_busy = 0;
    repeat (4) @(negedge clk);
    chk(leaks == 1 && marks == 0, "one leak, no mark yet");
    eg_empty = 1;
    @(negedge clk); @(negedge clk);
    chk(marks == 1 && state_o == CS_IDLE, "mark sent");
    // phase 3: random stall
    for (int e = 0; e < 60; e++) evq.push_back({1'b0, EVT_W'($urandom_range(63))});
    evq.push_back({1'b1, 6'd0});
    while (evq.size() > 0 || state_o != CS_IDLE) begin
      @(negedge clk);
      stall = ($urandom_range(3) == 0);
      if (stall && state_o == CS_DISPATCH) stalls++;
      last_pop = -1;
    end
    stall = 0;
    repeat (5) @(negedge clk);
    chk(exp_rows.size() == 0 && leaks == 2 && marks == 2, "phase 3 complete");
    chk(stalls > 0 && multi > 0 && zero > 0, "mechanisms exercised");
    $display("leaks=%0d marks=%0d stalls=%0d multi=%0d zero=%0d", leaks, marks, stalls, multi, zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
