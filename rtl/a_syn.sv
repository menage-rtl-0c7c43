// a_syn: analog synapse engine (A-Syn) of one lane of an MX-NeuraCore.
//
// A K-row SRAM holds the lane's 8-bit synaptic weights. When an input pulse
// arrives with its weight row WI, the row is read (registered, one cycle) and its
// bits drive a C2C ladder (c2c_ladder) that scales the pulse height by the
// weight. The scaled pulse, with the virtual neuron index that came with the
// input pulse, goes to the lane's A-Neuron. Structure follows the paper; the SRAM
// macro is written here as an array with one write port for weight loading and
// one read port. Timing: pulse in cycle t -> out_valid/vout in cycle t+1.
module a_syn #(
  parameter int unsigned K   = 1048576,
  parameter int unsigned WB  = 8,
  parameter int unsigned N   = 32,
  parameter int unsigned V_W = 8,
  localparam int unsigned VW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned WW = (K > 1) ? $clog2(K) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // weight loading
  input  logic           we,
  input  logic [WW-1:0]  waddr,
  input  logic [WB-1:0]  wdata,
  // pulse from the pulse generator
  input  logic           pulse,
  input  logic [V_W-1:0] amp,
  input  logic [VW-1:0]  vni,
  input  logic [WW-1:0]  wi,
  // scaled pulse to the A-Neuron
  output logic           out_valid,
  output logic [VW-1:0]  out_vni,
  output logic [V_W-1:0] vout
);
  logic [WB-1:0]  sram [K];
  logic [WB-1:0]  bitline;
  logic [V_W-1:0] amp_q;

  always_ff @(posedge clk) begin
    if (we) sram[waddr] <= wdata;
    if (pulse) begin
      bitline <= sram[wi];
      amp_q   <= amp;
      out_vni <= vni;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= pulse;
  end

  c2c_ladder #(.WB(WB), .V_W(V_W)) u_ladder (
    .vref (amp_q),
    .w    (bitline),
    .vout (vout)
  );
endmodule
