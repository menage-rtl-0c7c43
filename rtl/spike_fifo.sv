// spike_fifo: small synchronous FIFO used by the event generator to hold the
// spikes of one A-Neuron (their virtual neuron index) until they are sent.
// push/pop handshake, count output; push on a full FIFO is an error (asserted),
// the event generator prevents it by stalling the controller.
module spike_fifo #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned W     = 5
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          do_pop;

  assign do_pop = pop && (count != '0);
  assign dout   = mem[rptr];

  always_ff @(posedge clk) if (push) mem[wptr] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (push)   wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_pop) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + ($bits(count))'(push) - ($bits(count))'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (count != DEPTH[$clog2(DEPTH+1)-1:0]) || do_pop);
endmodule
