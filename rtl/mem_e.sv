// mem_e: Event memory (MEM_E) of one MX-NeuraCore.
//
// Each incoming event is written on the rising clock edge into a synchronous
// FIFO; the controller polls the head every cycle and pops it when it starts on
// the event. An entry is {marker, index}: index is the source-neuron number N_i,
// and marker=1 flags the end of a time step (an in-band token that is this
// design's choice; the paper only says that each event holds the source index).
//
// Interface: in_valid/in_ready write handshake (in_ready low when full); out_valid
// shows the head, pop removes it. A write and a pop may happen in the same cycle.
// The depth is not given by the paper.
module mem_e #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned EVT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [EVT_W:0]   in_data,
  output logic             out_valid,
  output logic [EVT_W:0]   out_data,
  input  logic             pop,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [EVT_W:0] mem [DEPTH];
  logic [AW-1:0]  wptr, rptr;
  logic           do_wr, do_rd;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = pop && out_valid;
  assign out_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + ($bits(count))'(do_wr) - ($bits(count))'(do_rd);
    end
  end

  // A pop is only legal when an entry is present.
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid);
endmodule
