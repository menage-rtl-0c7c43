// c2c_ladder: behavioural model of the C2C-ladder multiplier of an A-Syn.
//
// In the chip this is an analog capacitor ladder (C/2C sections of MOM
// capacitors) whose switches are driven by the SRAM bitlines W_0..W_{n-1}. It
// scales the input pulse: V_out = V_ref * sum_i W_i * 2^(i-n), the paper's Eq. (2).
// Here voltages are integer codes and the model computes exactly that product,
// truncated: vout = (vref * w) >> WB. It is combinational (the ladder settles
// within the cycle). Weights are unsigned, as in Eq. (2).
module c2c_ladder #(
  parameter int unsigned WB  = 8,
  parameter int unsigned V_W = 8
) (
  input  logic [V_W-1:0] vref,
  input  logic [WB-1:0]  w,
  output logic [V_W-1:0] vout
);
  logic [V_W+WB-1:0] prod;

  // Sum of the binary-weighted contributions of each bit, as the ladder forms it.
  always_comb begin
    prod = '0;
    for (int i = 0; i < WB; i++) begin
      if (w[i]) prod = prod + ((V_W+WB)'(vref) << i);
    end
  end

  assign vout = prod[WB +: V_W];
endmodule
