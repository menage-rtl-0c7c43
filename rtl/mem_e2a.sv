// mem_e2a: Event-to-Address memory (MEM_E2A) of one MX-NeuraCore.
//
// Addressed by the source-neuron index N_i of an event. Each row holds two
// fields, as in the paper: B_i, the number of MEM_S&N rows that belong to N_i
// (stored in the high bits, "the initial bits"), and A_i, the first of those
// rows (the low bits). The read is registered: b/a are valid the cycle after
// rd_en, like a synchronous SRAM. Rows are loaded through the write port before
// inference. The field widths and the depth are this design's choice.
module mem_e2a #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned B_W   = 8,
  parameter int unsigned A_W   = 20
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [B_W+A_W-1:0]       wdata,   // {B, A}
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [B_W-1:0]           b,
  output logic [A_W-1:0]           a
);
  logic [B_W+A_W-1:0] mem [DEPTH];
  logic [B_W+A_W-1:0] q;

  always_ff @(posedge clk) begin
    if (we)    mem[waddr] <= wdata;
    if (rd_en) q <= mem[rd_addr];
  end

  assign b = q[A_W +: B_W];
  assign a = q[A_W-1:0];
endmodule
