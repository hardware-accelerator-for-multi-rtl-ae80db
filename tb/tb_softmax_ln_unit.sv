// tb_softmax_ln_unit: checks ln(x) of the LN unit for x from 1.0 to 64.0
// (Q.15) against the leading-one / straight-line formula computed here and
// against the real logarithm within 25 LSB of Q.8 (about 0.1).
module tb_softmax_ln_unit;
  logic [21:0] x;
  logic signed [15:0] ln;
  softmax_ln_unit dut (.x(x), .ln(ln));
  int checks = 0, failures = 0;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      longint xv, k, l2; int w, want; real lr;
      xv = (n == 0) ? 32768 : 32768 + longint'($urandom % (64 * 32768 - 32768));
      x = 22'(xv);
      #1;
      w = 0;
      for (int b = 0; b < 22; b++) if (xv[b]) w = b;
      k = (xv - (64'sd1 <<< w)) >>> (w - 8);
      l2 = (longint'(w - 15) <<< 8) + k;
      want = int'((l2 >>> 1) + (l2 >>> 3) + (l2 >>> 4) + (l2 >>> 8));
      checks++;
      if (int'(ln) != want) begin
        failures++;
        if (failures < 10) $display("x=%0d ln=%0d want %0d", xv, ln, want);
      end
      lr = 256.0 * $ln(real'(xv) / 32768.0);
      checks++;
      if (absr(real'(ln) - lr) > 25.0) begin
        failures++;
        if (failures < 10) $display("x=%0d ln=%0d real %f", xv, ln, lr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
