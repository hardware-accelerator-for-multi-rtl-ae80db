// tb_softmax: the softmax module at s = 8. Sends four random D matrices
// (16-bit, 4 fraction bits) column by column, with a random mask (one row
// fully masked in the second matrix) and columns >= s mixed in that must be
// ignored. Each Y is compared with (a) the fixed-point model of the four
// stages computed here, bit for bit, and (b) the real masked softmax within
// 14 LSB of Q0.7. Also checks that Y starts s+3 cycles after the last D
// column and that busy clears after the last Y column.
module tb_softmax;
  import tfa_pkg::*;
  localparam int S = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; logic [5:0] in_col; val_t in_d [S];
  logic [2:0] mask_col; logic [S-1:0] mask_bits;
  logic out_valid, busy; logic [2:0] out_col; data_t out_y [S];
  softmax #(.S(S)) dut (.*);

  bit M [S][S];
  always_comb for (int i = 0; i < S; i++) mask_bits[i] = M[i][mask_col];

  int D [S][S];
  int Y [S][S];
  int checks = 0, failures = 0;
  int cyc = 0, t_last = 0;
  always @(posedge clk) cyc <= cyc + 1;
  function automatic real absr(input real v); return (v < 0.0) ? -v : v; endfunction

  function automatic int exp_m(input longint z);
    longint t, u; int v;
    t = z + (z >>> 1) - (z >>> 4);
    u = t >>> 8; v = int'(t - (u <<< 8));
    if (-u >= 16) return 0;
    return ((256 + v) << 7) >> (-u);
  endfunction
  function automatic int ln_m(input longint x);
    int w; longint k, l2;
    if (x == 0) return 0;
    w = 0;
    for (int b = 0; b < 40; b++) if (x[b]) w = b;
    k = (w >= 8) ? (x - (64'sd1 <<< w)) >>> (w - 8) : (x - (64'sd1 <<< w)) <<< (8 - w);
    l2 = (longint'(w - 15) <<< 8) + k;
    return int'((l2 >>> 1) + (l2 >>> 3) + (l2 >>> 4) + (l2 >>> 8));
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_col = 0;
    for (int i = 0; i < S; i++) in_d[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      for (int i = 0; i < S; i++)
        for (int j = 0; j < S; j++) begin
          D[i][j] = int'($urandom % 1200) - 600;
          M[i][j] = (m == 0) ? 1'b0 : (m == 1 && i == 3) ? 1'b1 : ($urandom % 4 == 0);
        end
      // model
      for (int i = 0; i < S; i++) begin
        longint x [S]; longint mx, sum; bit any; int l;
        real rs, rmx;
        any = 0; mx = 0; sum = 0; rs = 0.0; rmx = -1.0e9;
        for (int j = 0; j < S; j++) begin
          x[j] = (longint'(D[i][j]) <<< 8) >>> 7;
          if (!M[i][j] && (!any || x[j] > mx)) begin mx = x[j]; any = 1; end
          if (!M[i][j] && real'(D[i][j]) / 128.0 > rmx) rmx = real'(D[i][j]) / 128.0;
        end
        for (int j = 0; j < S; j++) if (!M[i][j]) begin
          sum += exp_m(x[j] - mx);
          rs += $exp(real'(D[i][j]) / 128.0 - rmx);
        end
        l = ln_m(sum);
        for (int j = 0; j < S; j++) begin
          int r; real yr;
          r = (exp_m(x[j] - mx - l) + 128) >> 8;
          Y[i][j] = (M[i][j] || !any) ? 0 : (r > 127 ? 127 : r);
          yr = (M[i][j] || !any) ? 0.0 : 128.0 * $exp(real'(D[i][j]) / 128.0 - rmx) / rs;
          checks++;
          if (absr(real'(Y[i][j]) - yr) > 14.0) begin
            failures++; $display("approximation: Y(%0d,%0d) = %0d, real %f", i, j, Y[i][j], yr);
          end
        end
      end
      // send the columns, with two out-of-range columns in between
      for (int j = 0; j < S; j++) begin
        in_valid <= 1; in_col <= 6'(j);
        for (int i = 0; i < S; i++) in_d[i] <= val_t'(D[i][j]);
        @(posedge clk);
        if (j == 2) begin
          in_col <= 6'(S + 5);
          for (int i = 0; i < S; i++) in_d[i] <= 16'sh7fff;
          @(posedge clk);
        end
      end
      t_last = cyc;
      in_valid <= 0;
      for (int j = 0; j < S; j++) begin
        do @(posedge clk); while (!out_valid);
        if (j == 0) begin
          checks++;
          if (cyc - t_last != S + 3) begin
            failures++; $display("first Y after %0d cycles, want %0d", cyc - t_last, S + 3);
          end
        end
        checks++;
        if (int'(out_col) != j) begin failures++; $display("column %0d, want %0d", out_col, j); end
        for (int i = 0; i < S; i++) begin
          checks++;
          if (int'(out_y[i]) != Y[i][j]) begin
            failures++; $display("matrix %0d Y(%0d,%0d) = %0d, want %0d", m, i, j, out_y[i], Y[i][j]);
          end
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (busy) begin failures++; $display("busy after the last column"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
