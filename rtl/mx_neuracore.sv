// mx_neuracore: one MX-NeuraCore, the engine that runs one layer of the network.
//
// Datapath, as in the paper's core diagram: input events are queued in MEM_E;
// the memory-based controller looks each one up in MEM_E2A and reads its
// MEM_S&N rows; the pulse generator sends a pulse to every selected A-Syn lane;
// A-Syn j scales it by its stored weight (C2C ladder) and A-Neuron j integrates
// it on the chosen virtual neuron, firing when the threshold is reached; the
// event generator turns spikes into output events for the next core.
//
// Pipeline of one MEM_S&N row read in cycle t: row at t+1, pulses at t+2,
// scaled pulses at t+3, potentials updated at the end of t+3, spikes at t+4,
// output event from t+5. A neuron event with B rows holds the controller for
// B+2 cycles. A step marker makes the core drain, leak all capacitors, and
// forward the marker.
//
// Configuration (this design's port): cfg_sel picks CFG_E2A (row cfg_addr =
// {B,A}), CFG_SN (row cfg_addr = packed MEM_S&N word), CFG_WEIGHT (weight row
// cfg_addr of lane cfg_idx), CFG_SLOT (slot cfg_addr = j*N+k gets neuron index
// cfg_wdata, and its capacitor is cleared) or CFG_VTH (threshold).
module mx_neuracore
  import menage_pkg::*;
#(
  parameter int unsigned M          = 20,
  parameter int unsigned N          = 32,
  parameter int unsigned K          = 1048576,
  parameter int unsigned WB         = 8,
  parameter int unsigned EVT_W      = 16,
  parameter int unsigned MEME_DEPTH = 256,
  parameter int unsigned E2A_DEPTH  = 65536,
  parameter int unsigned SN_DEPTH   = 1048576,
  parameter int unsigned B_W        = 8,
  parameter int unsigned V_W        = 8,
  parameter int unsigned VREF       = 255,
  parameter int unsigned MEM_W      = 12,
  parameter int unsigned LEAK_SHIFT = 3,
  parameter int unsigned VTH_INIT   = 112,
  localparam int unsigned VW        = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned WW        = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned A_W       = $clog2(SN_DEPTH),
  localparam int unsigned SW        = $clog2(M*N),
  localparam int unsigned ROW_W     = M + M*VW + M*WW,
  localparam int unsigned CFG_AW    = (A_W > WW) ? ((A_W > EVT_W) ? A_W : EVT_W)
                                                 : ((WW > EVT_W) ? WW : EVT_W),
  localparam int unsigned CFG_DW    = (ROW_W > B_W + A_W) ? ROW_W : B_W + A_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // input events
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [EVT_W:0]          in_data,
  // output events
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [EVT_W:0]          out_data,
  // configuration
  input  logic                    cfg_we,
  input  cfg_sel_e                cfg_sel,
  input  logic [$clog2(M)-1:0]    cfg_idx,
  input  logic [CFG_AW-1:0]       cfg_addr,
  input  logic [CFG_DW-1:0]       cfg_wdata,
  // observation
  output ctrl_state_e             ctrl_state,
  output logic                    leak_o,
  output logic                    stall_o
);
  // MEM_E
  logic                 ev_valid, ev_pop;
  logic [EVT_W:0]       ev_data;
  logic [$clog2(MEME_DEPTH+1)-1:0] ev_count;
  // lookup / rows
  logic                 e2a_rd_en;
  logic [EVT_W-1:0]     e2a_rd_addr;
  logic [B_W-1:0]       e2a_b;
  logic [A_W-1:0]       e2a_a;
  logic                 sn_rd_en, sn_valid;
  logic [A_W-1:0]       sn_rd_addr;
  logic [M-1:0]         sn_ni;
  logic [M-1:0][VW-1:0] sn_vni;
  logic [M-1:0][WW-1:0] sn_wi;
  // pulses
  logic [M-1:0]         pulse;
  logic [V_W-1:0]       amp;
  logic [M-1:0][VW-1:0] p_vni;
  logic [M-1:0][WW-1:0] p_wi;
  // lanes
  logic [M-1:0]         syn_valid, spike;
  logic [M-1:0][VW-1:0] syn_vni, spike_vni;
  logic [M-1:0][V_W-1:0] syn_v;
  // control
  logic                 leak, mark_req, eg_stall, eg_empty, pipe_busy;
  logic [MEM_W-1:0]     vth;
  logic [SW-1:0]        cfg_slot;

  mem_e #(.DEPTH(MEME_DEPTH), .EVT_W(EVT_W)) u_mem_e (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid (ev_valid), .out_data (ev_data), .pop (ev_pop), .count (ev_count)
  );

  event_controller #(.EVT_W(EVT_W), .B_W(B_W), .A_W(A_W)) u_ctrl (
    .clk, .rst_n,
    .ev_valid, .ev_data, .ev_pop,
    .e2a_rd_en, .e2a_rd_addr, .e2a_b, .e2a_a,
    .sn_rd_en, .sn_rd_addr,
    .stall (eg_stall), .pipe_busy, .eg_empty,
    .leak, .mark_req, .state_o (ctrl_state)
  );

  mem_e2a #(.DEPTH(E2A_DEPTH), .B_W(B_W), .A_W(A_W)) u_e2a (
    .clk,
    .we    (cfg_we && cfg_sel == CFG_E2A),
    .waddr (cfg_addr[$clog2(E2A_DEPTH)-1:0]),
    .wdata (cfg_wdata[B_W+A_W-1:0]),
    .rd_en (e2a_rd_en), .rd_addr (e2a_rd_addr[$clog2(E2A_DEPTH)-1:0]),
    .b (e2a_b), .a (e2a_a)
  );

  mem_sn #(.M(M), .N(N), .K(K), .DEPTH(SN_DEPTH)) u_sn (
    .clk, .rst_n,
    .we    (cfg_we && cfg_sel == CFG_SN),
    .waddr (cfg_addr[A_W-1:0]),
    .wdata (cfg_wdata[ROW_W-1:0]),
    .rd_en (sn_rd_en), .rd_addr (sn_rd_addr),
    .rd_valid (sn_valid), .ni (sn_ni), .vni (sn_vni), .wi (sn_wi)
  );

  pulse_generator #(.M(M), .N(N), .K(K), .V_W(V_W), .VREF(VREF)) u_pg (
    .clk, .rst_n,
    .row_valid (sn_valid), .ni (sn_ni), .vni (sn_vni), .wi (sn_wi),
    .pulse, .amp, .p_vni, .p_wi
  );

  assign cfg_slot = cfg_addr[SW-1:0];

  for (genvar j = 0; j < M; j++) begin : g_lane
    a_syn #(.K(K), .WB(WB), .N(N), .V_W(V_W)) u_syn (
      .clk, .rst_n,
      .we    (cfg_we && cfg_sel == CFG_WEIGHT && cfg_idx == ($clog2(M))'(j)),
      .waddr (cfg_addr[WW-1:0]),
      .wdata (cfg_wdata[WB-1:0]),
      .pulse (pulse[j]), .amp, .vni (p_vni[j]), .wi (p_wi[j]),
      .out_valid (syn_valid[j]), .out_vni (syn_vni[j]), .vout (syn_v[j])
    );

    a_neuron #(.N(N), .V_W(V_W), .MEM_W(MEM_W), .LEAK_SHIFT(LEAK_SHIFT)) u_neu (
      .clk, .rst_n,
      .in_valid (syn_valid[j]), .in_vni (syn_vni[j]), .in_v (syn_v[j]),
      .leak,
      .clr      (cfg_we && cfg_sel == CFG_SLOT && (cfg_slot / SW'(N)) == SW'(j)),
      .clr_vni  (VW'(cfg_slot % SW'(N))),
      .vth,
      .spike (spike[j]), .spike_vni (spike_vni[j]),
      .vmem  ()
    );
  end

  event_generator #(.M(M), .N(N), .EVT_W(EVT_W)) u_eg (
    .clk, .rst_n,
    .spike, .spike_vni,
    .map_we    (cfg_we && cfg_sel == CFG_SLOT),
    .map_addr  (cfg_slot),
    .map_wdata (cfg_wdata[EVT_W-1:0]),
    .mark_req,
    .out_valid, .out_ready, .out_data,
    .stall (eg_stall), .empty (eg_empty)
  );

  assign pipe_busy = sn_valid || (|pulse) || (|syn_valid) || (|spike);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              vth <= MEM_W'(VTH_INIT);
    else if (cfg_we && cfg_sel == CFG_VTH)   vth <= cfg_wdata[MEM_W-1:0];
  end

  assign leak_o  = leak;
  assign stall_o = eg_stall;
endmodule
