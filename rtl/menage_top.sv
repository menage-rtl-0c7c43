// menage_top: the MENAGE accelerator, a chain of NUM_CORES MX-NeuraCores.
//
// Core i runs layer i of a feed-forward spiking network: events from an event
// camera (source-neuron indices, rate-coded spikes, with step markers between
// time steps) enter core 0, each core's output events feed the next core, and
// the last core's events leave on out_*. Back-pressure runs backwards through
// the valid/ready links. The defaults are the paper's larger accelerator
// (5 cores, 20 A-Neurons with 32 virtual neurons, 20 MB of weights per core);
// the smaller one is NUM_CORES=4, M=10, N=16, K=40960.
//
// Configuration writes go to the core numbered cfg_core (see mx_neuracore).
// step_seen/leak/stall are per-core observation outputs.
module menage_top
  import menage_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 5,
  parameter int unsigned M          = 20,
  parameter int unsigned N          = 32,
  parameter int unsigned K          = 1048576,
  parameter int unsigned EVT_W      = 16,
  parameter int unsigned MEME_DEPTH = 256,
  parameter int unsigned E2A_DEPTH  = 65536,
  parameter int unsigned SN_DEPTH   = 1048576,
  parameter int unsigned B_W        = 8,
  localparam int unsigned VW        = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned WW        = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned A_W       = $clog2(SN_DEPTH),
  localparam int unsigned ROW_W     = M + M*VW + M*WW,
  localparam int unsigned CFG_AW    = (A_W > WW) ? ((A_W > EVT_W) ? A_W : EVT_W)
                                                 : ((WW > EVT_W) ? WW : EVT_W),
  localparam int unsigned CFG_DW    = (ROW_W > B_W + A_W) ? ROW_W : B_W + A_W,
  localparam int unsigned CORE_W    = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [EVT_W:0]       in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [EVT_W:0]       out_data,
  input  logic                 cfg_we,
  input  logic [CORE_W-1:0]    cfg_core,
  input  cfg_sel_e             cfg_sel,
  input  logic [$clog2(M)-1:0] cfg_idx,
  input  logic [CFG_AW-1:0]    cfg_addr,
  input  logic [CFG_DW-1:0]    cfg_wdata,
  output logic [NUM_CORES-1:0] leak_o,
  output logic [NUM_CORES-1:0] stall_o
);
  logic [NUM_CORES:0]            l_valid, l_ready;
  logic [NUM_CORES:0][EVT_W:0]   l_data;

  assign l_valid[0] = in_valid;
  assign in_ready   = l_ready[0];
  assign l_data[0]  = in_data;
  assign out_valid  = l_valid[NUM_CORES];
  assign l_ready[NUM_CORES] = out_ready;
  assign out_data   = l_data[NUM_CORES];

  for (genvar i = 0; i < NUM_CORES; i++) begin : g_core
    mx_neuracore #(
      .M(M), .N(N), .K(K), .EVT_W(EVT_W), .MEME_DEPTH(MEME_DEPTH),
      .E2A_DEPTH(E2A_DEPTH), .SN_DEPTH(SN_DEPTH), .B_W(B_W)
    ) u_core (
      .clk, .rst_n,
      .in_valid  (l_valid[i]),   .in_ready  (l_ready[i]),   .in_data  (l_data[i]),
      .out_valid (l_valid[i+1]), .out_ready (l_ready[i+1]), .out_data (l_data[i+1]),
      .cfg_we    (cfg_we && cfg_core == CORE_W'(i)),
      .cfg_sel, .cfg_idx, .cfg_addr, .cfg_wdata,
      .ctrl_state (),
      .leak_o  (leak_o[i]),
      .stall_o (stall_o[i])
    );
  end
endmodule
