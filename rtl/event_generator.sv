// event_generator: Event Generator of one MX-NeuraCore.
//
// Collects the output spikes of the M A-Neurons and turns them into a stream of
// output events for the next core (the paper's core diagram names the block and
// its "stream of output events"; the insides are this design's). Each A-Neuron
// has an 8-deep spike_fifo. A fixed-priority arbiter (lowest A-Neuron first)
// sends one event per cycle on a valid/ready channel. An event carries the index
// of the neuron that fired: a slot table maps slot j*N+k (A-Neuron j, capacitor
// k) to the neuron index it holds under the current mapping.
//
// stall is high while any spike FIFO holds an entry; the controller then stops
// reading MEM_S&N rows, so at most five more spikes (the rows already in flight)
// reach a FIFO. mark_req asks for a step marker; it is sent once all FIFOs are
// empty and before any later spike. empty is high when nothing is pending.
module event_generator #(
  parameter int unsigned M      = 20,
  parameter int unsigned N      = 32,
  parameter int unsigned EVT_W  = 16,
  parameter int unsigned QDEPTH = 8,
  localparam int unsigned VW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW    = $clog2(M*N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [M-1:0]         spike,
  input  logic [M-1:0][VW-1:0] spike_vni,
  input  logic                 map_we,
  input  logic [SW-1:0]        map_addr,
  input  logic [EVT_W-1:0]     map_wdata,
  input  logic                 mark_req,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [EVT_W:0]       out_data,   // {marker, neuron index}
  output logic                 stall,
  output logic                 empty
);
  localparam int unsigned CW = $clog2(QDEPTH+1);

  logic [EVT_W-1:0]     slot_map [M*N];
  logic [M-1:0]         nonempty, pop;
  logic [M-1:0][VW-1:0] head;
  logic [M-1:0][CW-1:0] cnt;
  logic                 mark_pend;
  logic                 sel_found;
  logic [$clog2(M)-1:0] sel;
  logic [SW-1:0]        slot;

  for (genvar j = 0; j < M; j++) begin : g_q
    spike_fifo #(.DEPTH(QDEPTH), .W(VW)) u_q (
      .clk, .rst_n,
      .push (spike[j]), .din (spike_vni[j]),
      .pop  (pop[j]),   .dout (head[j]), .count (cnt[j])
    );
    assign nonempty[j] = (cnt[j] != '0);
  end

  always_ff @(posedge clk) if (map_we) slot_map[map_addr] <= map_wdata;

  // lowest-index non-empty queue
  always_comb begin
    sel_found = 1'b0;
    sel       = '0;
    for (int j = M - 1; j >= 0; j--) begin
      if (nonempty[j]) begin
        sel_found = 1'b1;
        sel       = ($clog2(M))'(j);
      end
    end
  end

  assign slot = SW'(sel) * SW'(N) + SW'(head[sel]);

  always_comb begin
    pop = '0;
    if (mark_pend) begin
      out_valid = 1'b1;
      out_data  = {1'b1, {EVT_W{1'b0}}};
    end else begin
      out_valid = sel_found;
      out_data  = {1'b0, slot_map[slot]};
      pop[sel]  = sel_found && out_ready;
    end
  end

  assign stall = |nonempty;
  assign empty = !(|nonempty) && !mark_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       mark_pend <= 1'b0;
    else if (mark_req)                mark_pend <= 1'b1;
    else if (mark_pend && out_ready)  mark_pend <= 1'b0;
  end

  a_mark_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
    mark_req |-> !(|nonempty));
endmodule
