// tb_layernorm: LayerNorm at s = 4, h = 1 (64 columns). Runs three ResBlocks
// of random G (one with a constant row, variance 0) through the module and
// compares every output with a layer normalisation computed here in real
// arithmetic from the same fixed-point mean, within 2 LSB. Checks that the
// first output column follows the last G column after 5 cycles, that 64
// columns leave in order, and that 'done' pulses with the last one.
module tb_layernorm;
  import tfa_pkg::*;
  localparam int S = 4, H = 1, DM = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid, pw_en, out_valid, done, busy;
  logic [5:0] in_col, pw_addr, out_col;
  val_t in_g [S]; data_t pw_gamma, pw_beta; data_t out_data [S];
  layernorm #(.S(S), .H(H)) dut (.*);

  int G [S][DM]; int gam [DM]; int bet [DM];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int ref_out(input int r, input int n);
    longint s1, s2, efx, eg2, v; real rr, val;
    s1 = 0; s2 = 0;
    for (int t = 0; t < DM; t++) begin s1 += G[r][t]; s2 += G[r][t] * G[r][t]; end
    efx = (s1 * ((64'sd1 <<< 20) / DM)) >>> 12;
    eg2 = (s2 * ((64'sd1 <<< 20) / DM)) >>> 4;
    v = eg2 - efx * efx; if (v < 0) v = 0; v = v + 1;
    rr = 1.0 / $sqrt(real'(v) / 65536.0);
    val = ((real'(G[r][n]) * 256.0 - real'(efx)) / 256.0) * rr * (real'(gam[n]) / 64.0) + real'(bet[n]) / 16.0;
    val = $floor(val * 16.0 + 0.5);
    if (val > 127.0) val = 127.0;
    if (val < -128.0) val = -128.0;
    return int'(val);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; pw_en = 0; in_col = 0; pw_addr = 0; pw_gamma = 0; pw_beta = 0;
    for (int i = 0; i < S; i++) in_g[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 3; blk++) begin
      int t_last, ncol;
      for (int t = 0; t < DM; t++) begin
        gam[t] = int'($urandom % 80) + 20; bet[t] = int'($urandom % 33) - 16;
        pw_en <= 1; pw_addr <= 6'(t); pw_gamma <= data_t'(gam[t]); pw_beta <= data_t'(bet[t]);
        @(posedge clk);
      end
      pw_en <= 0;
      for (int r = 0; r < S; r++)
        for (int t = 0; t < DM; t++)
          G[r][t] = (blk == 1 && r == 2) ? 17 : int'($urandom % (blk == 2 ? 500 : 120)) - (blk == 2 ? 200 : 60);
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      for (int t = 0; t < DM; t++) begin
        in_valid <= 1; in_col <= 6'(t);
        for (int r = 0; r < S; r++) in_g[r] <= val_t'(G[r][t]);
        @(posedge clk);
        if (t % 7 == 3) begin in_valid <= 0; @(posedge clk); end   // gaps are allowed
      end
      in_valid <= 0;
      t_last = cyc;
      ncol = 0;
      while (ncol < DM) begin
        @(posedge clk);
        if (out_valid) begin
          if (ncol == 0) begin
            checks++;
            if (cyc - t_last != 5) begin failures++; $display("first output after %0d cycles", cyc - t_last); end
          end
          checks++;
          if (int'(out_col) != ncol) begin failures++; $display("column %0d want %0d", out_col, ncol); end
          for (int r = 0; r < S; r++) begin
            int e, d;
            e = ref_out(r, ncol);
            d = (int'(out_data[r]) > e) ? int'(out_data[r]) - e : e - int'(out_data[r]);
            checks++;
            if (d > 2) begin failures++; $display("blk %0d out(%0d,%0d) = %0d want %0d", blk, r, ncol, out_data[r], e); end
          end
          checks++;
          if (done != (ncol == DM - 1)) begin failures++; $display("done at column %0d", ncol); end
          ncol++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
