// event_controller: memory-based controller of one MX-NeuraCore.
//
// Every cycle it polls the head of MEM_E. For a neuron event N_i it pops the
// entry and reads MEM_E2A at N_i (cycle 1); when {B_i, A_i} arrive (cycle 2) it
// reads the B_i consecutive MEM_S&N rows A_i .. A_i+B_i-1, one per cycle. While
// those rows are being dispatched it fetches no new event, as the paper states.
// A neuron event with B_i rows therefore occupies the controller for B_i+2
// cycles (2 cycles when B_i = 0).
//
// A step-marker entry ends a time step: the controller waits until no pulse is
// in flight (pipe_busy low), pulses leak for one cycle (the discharge command the
// paper assigns to the controller), then waits for the event generator to be
// empty and pulses mark_req so the marker is passed to the next core. The marker
// mechanism and the stall input (event generator back-pressure, which holds row
// reads) are this design's choices. e2a_rd_addr is the index field of the MEM_E
// head, wired through: the lookup address is the event itself.
module event_controller
  import menage_pkg::*;
#(
  parameter int unsigned EVT_W = 16,
  parameter int unsigned B_W   = 8,
  parameter int unsigned A_W   = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  // MEM_E head
  input  logic             ev_valid,
  input  logic [EVT_W:0]   ev_data,     // {marker, index}
  output logic             ev_pop,
  // MEM_E2A lookup
  output logic             e2a_rd_en,
  output logic [EVT_W-1:0] e2a_rd_addr,
  input  logic [B_W-1:0]   e2a_b,
  input  logic [A_W-1:0]   e2a_a,
  // MEM_S&N row reads
  output logic             sn_rd_en,
  output logic [A_W-1:0]   sn_rd_addr,
  // status from the datapath
  input  logic             stall,
  input  logic             pipe_busy,
  input  logic             eg_empty,
  // commands
  output logic             leak,
  output logic             mark_req,
  output ctrl_state_e      state_o
);
  ctrl_state_e    state, state_n;
  logic [A_W-1:0] row_addr;
  logic [B_W-1:0] rows_left;

  assign state_o     = state;
  assign e2a_rd_addr = ev_data[EVT_W-1:0];
  assign sn_rd_addr  = row_addr;

  always_comb begin
    state_n   = state;
    ev_pop    = 1'b0;
    e2a_rd_en = 1'b0;
    sn_rd_en  = 1'b0;
    leak      = 1'b0;
    mark_req  = 1'b0;
    unique case (state)
      CS_IDLE: begin
        if (ev_valid) begin
          ev_pop = 1'b1;
          if (ev_data[EVT_W]) begin
            state_n = CS_DRAIN;
          end else begin
            e2a_rd_en = 1'b1;
            state_n   = CS_LOOKUP;
          end
        end
      end
      CS_LOOKUP:   state_n = (e2a_b == '0) ? CS_IDLE : CS_DISPATCH;
      CS_DISPATCH: begin
        if (!stall) begin
          sn_rd_en = 1'b1;
          if (rows_left == B_W'(1)) state_n = CS_IDLE;
        end
      end
      CS_DRAIN:    if (!pipe_busy) state_n = CS_LEAK;
      CS_LEAK: begin
        leak    = 1'b1;
        state_n = CS_MARK;
      end
      CS_MARK: begin
        if (eg_empty) begin
          mark_req = 1'b1;
          state_n  = CS_IDLE;
        end
      end
      default: state_n = CS_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= CS_IDLE;
      row_addr  <= '0;
      rows_left <= '0;
    end else begin
      state <= state_n;
      if (state == CS_LOOKUP) begin
        row_addr  <= e2a_a;
        rows_left <= e2a_b;
      end else if (sn_rd_en) begin
        row_addr  <= row_addr + 1'b1;
        rows_left <= rows_left - 1'b1;
      end
    end
  end

  // No new event is fetched while rows of the previous one are outstanding.
  a_no_fetch_in_dispatch: assert property (@(posedge clk) disable iff (!rst_n)
    (state != CS_IDLE) |-> !ev_pop);
  a_leak_one_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    leak |=> !leak);
endmodule
