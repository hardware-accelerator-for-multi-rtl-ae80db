// tb_softmax_exp_unit: sweeps z from -20 to 0 (Q.8) and checks the EXP unit
// against the shift-add / straight-line formula computed here, and against
// the real exp(z) within the error such an approximation has (12 % + 2 LSB).
module tb_softmax_exp_unit;
  logic signed [23:0] z;
  logic [15:0] e;
  softmax_exp_unit dut (.z(z), .e(e));
  int checks = 0, failures = 0;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int zi = -5120; zi <= 0; zi += 3) begin
      longint t, u; int v, want; real ex;
      z = 24'(zi);
      #1;
      t = zi + (zi >>> 1) - (zi >>> 4);
      u = t >>> 8;
      v = int'(t - (u <<< 8));
      want = (-u >= 16) ? 0 : ((256 + v) << 7) >> (-u);
      checks++;
      if (int'(e) != want) begin
        failures++;
        if (failures < 10) $display("z=%0d e=%0d want %0d", zi, e, want);
      end
      ex = 32768.0 * $exp(real'(zi) / 256.0);
      checks++;
      if (absr(real'(e) - ex) > 0.12 * ex + 2.0) begin
        failures++;
        if (failures < 10) $display("z=%0d e=%0d exp=%f", zi, e, ex);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
