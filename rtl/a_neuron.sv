// a_neuron: behavioural model of the analog neuron engine (A-Neuron).
//
// In the chip an op-amp integrator and a comparator op-amp are shared by N
// storage capacitors ("virtual neurons"). For each pulse the stored potential of
// the selected capacitor is restored onto the integrator, the scaled input is
// added, and the result is stored back; the comparator fires when the potential
// reaches the threshold, and the delay-and-reset circuit returns the capacitor to
// V_reset. On the controller's leak command a portion of every capacitor's charge
// is discharged. This is the leaky integrate-and-fire neuron of the paper.
//
// The model uses integer codes: v[k] in MEM_W bits (saturating), V_reset = 0,
// leak v -= v >> LEAK_SHIFT on all capacitors at once. The rising potential of
// the model mirrors the falling output of the paper's inverting integrator. The
// leak portion, V_reset value and code widths are this design's choices. clr
// empties one capacitor when the mapping gives it to another neuron.
//
// Timing: in_valid in cycle t updates v at the clock edge ending t; spike and
// spike_vni are registered and valid in cycle t+1. in_valid and leak must not
// coincide (the controller drains all pulses before it leaks).
module a_neuron #(
  parameter int unsigned N          = 32,
  parameter int unsigned V_W        = 8,
  parameter int unsigned MEM_W      = 12,
  parameter int unsigned LEAK_SHIFT = 3,
  localparam int unsigned VW        = (N > 1) ? $clog2(N) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [VW-1:0]          in_vni,
  input  logic [V_W-1:0]         in_v,
  input  logic                   leak,
  input  logic                   clr,
  input  logic [VW-1:0]          clr_vni,
  input  logic [MEM_W-1:0]       vth,
  output logic                   spike,
  output logic [VW-1:0]          spike_vni,
  output logic [N-1:0][MEM_W-1:0] vmem
);
  logic [MEM_W:0]   sum;       // one extra bit to detect saturation
  logic [MEM_W-1:0] v_int;     // integrator output
  logic             fire;

  always_comb begin
    sum   = {1'b0, vmem[in_vni]} + (MEM_W+1)'(in_v);
    v_int = sum[MEM_W] ? '1 : sum[MEM_W-1:0];
    fire  = in_valid && (v_int >= vth);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem      <= '0;
      spike     <= 1'b0;
      spike_vni <= '0;
    end else begin
      spike <= fire;
      if (fire) spike_vni <= in_vni;
      if (leak) begin
        for (int k = 0; k < N; k++) vmem[k] <= vmem[k] - (vmem[k] >> LEAK_SHIFT);
      end else if (in_valid) begin
        vmem[in_vni] <= fire ? '0 : v_int;
      end
      if (clr) vmem[clr_vni] <= '0;
    end
  end

  a_no_pulse_during_leak: assert property (@(posedge clk) disable iff (!rst_n) !(leak && in_valid));
endmodule
