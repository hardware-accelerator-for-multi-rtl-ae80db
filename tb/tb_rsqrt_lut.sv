// tb_rsqrt_lut: checks r = x^-0.5 (x in Q.16, r in Q.16) for values of x
// from 2^-16 to 2^30 against the real inverse square root, within the 1.6 %
// the 5-bit mantissa table allows, plus 1 LSB.
module tb_rsqrt_lut;
  logic [47:0] x;
  logic [25:0] r;
  rsqrt_lut dut (.x(x), .r(r));
  int checks = 0, failures = 0;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      longint unsigned xv; int e; real want;
      e = n % 46;
      xv = (64'd1 << e) + (64'($urandom) & ((64'd1 << e) - 1));
      x = 48'(xv);
      #1;
      want = 65536.0 / $sqrt(real'(xv) / 65536.0);
      if (want > real'((1 << 26) - 1)) want = real'((1 << 26) - 1);
      checks++;
      if (absr(real'(r) - want) > 0.016 * want + 1.0) begin
        failures++;
        if (failures < 10) $display("x=%0d r=%0d want %f", xv, r, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
