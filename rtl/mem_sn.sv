// mem_sn: Synapse and Neuron Assignment memory (MEM_S&N) of one MX-NeuraCore.
//
// One row describes up to M synaptic connections of a source neuron, one per
// A-Neuron: M one-bit flags NI_j (A-Neuron j receives the pulse), M virtual
// neuron indices VNI_j of log2(N) bits (which capacitor of A-Neuron j), and M
// weight-row addresses WI_j of log2(K) bits (which row of A-Syn j's weight SRAM).
// These three column groups and their widths follow the paper. The packing is
// this design's: bits [M-1:0] are NI, then M VNI fields, then M WI fields, with
// lane 0 at the low end of each group.
//
// Read is registered: rd_valid/ni/vni/wi appear one cycle after rd_en.
// The depth is not given by the paper; it defaults to K.
module mem_sn #(
  parameter int unsigned M     = 20,
  parameter int unsigned N     = 32,
  parameter int unsigned K     = 1048576,
  parameter int unsigned DEPTH = 1048576,
  localparam int unsigned VW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned WW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned ROW_W = M + M*VW + M*WW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [ROW_W-1:0]         wdata,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic                     rd_valid,
  output logic [M-1:0]             ni,
  output logic [M-1:0][VW-1:0]     vni,
  output logic [M-1:0][WW-1:0]     wi
);
  logic [ROW_W-1:0] mem [DEPTH];
  logic [ROW_W-1:0] q;

  always_ff @(posedge clk) begin
    if (we)    mem[waddr] <= wdata;
    if (rd_en) q <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

  assign ni  = q[M-1:0];
  assign vni = q[M +: M*VW];
  assign wi  = q[M + M*VW +: M*WW];
endmodule
