// pulse_generator: Pulse Generator of one MX-NeuraCore.
//
// Sits between MEM_S&N and the A-Syn engines (as drawn in the paper's core
// diagram, which only names it). For every MEM_S&N row that arrives it sends, one
// cycle later and in parallel, an input pulse to each A-Syn j whose NI_j flag is
// set, together with that lane's weight row WI_j and virtual neuron index VNI_j.
// The pulse height V_ref is the constant code VREF (standing for the 0.8 V pulse
// of the paper's neuron simulation), so amp is a constant output: in silicon it
// is the reference voltage routed to the ladders. The single register stage is
// this design's.
module pulse_generator #(
  parameter int unsigned M    = 20,
  parameter int unsigned N    = 32,
  parameter int unsigned K    = 1048576,
  parameter int unsigned V_W  = 8,
  parameter int unsigned VREF = 255,
  localparam int unsigned VW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned WW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 row_valid,
  input  logic [M-1:0]         ni,
  input  logic [M-1:0][VW-1:0] vni,
  input  logic [M-1:0][WW-1:0] wi,
  output logic [M-1:0]         pulse,
  output logic [V_W-1:0]       amp,
  output logic [M-1:0][VW-1:0] p_vni,
  output logic [M-1:0][WW-1:0] p_wi
);
  assign amp = V_W'(VREF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pulse <= '0;
    else        pulse <= row_valid ? ni : '0;
  end

  always_ff @(posedge clk) begin
    if (row_valid) begin
      p_vni <= vni;
      p_wi  <= wi;
    end
  end
endmodule
