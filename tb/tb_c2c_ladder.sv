// tb_c2c_ladder: checks the ladder model against Eq. (2) computed in real
// arithmetic, V_out = V_ref * sum_i W_i 2^(i-n), truncated to an integer code,
// for every weight and a set of reference codes.
module tb_c2c_ladder;
  localparam int WB = 8, V_W = 8;
  logic [V_W-1:0] vref;
  logic [WB-1:0]  w;
  logic [V_W-1:0] vout;
  int checks = 0, failures = 0;

  c2c_ladder #(.WB(WB), .V_W(V_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vr [5] = '{255, 128, 200, 1, 0};
    for (int r = 0; r < 5; r++) begin
      for (int x = 0; x < 256; x++) begin
        real s;
        int  exp_v;
        vref = V_W'(vr[r]); w = WB'(x);
        #1;
        s = 0.0;
        for (int i = 0; i < WB; i++) if (x & (1 << i)) s += 2.0 ** (i - WB);
        exp_v = $floor(vr[r] * s + 1e-9);
        checks++;
        if (int'(vout) != exp_v) begin
          failures++; $display("FAIL vref=%0d w=%0d got %0d exp %0d", vr[r], x, vout, exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
