// tb_systolic_array: self-checking test of the s x 64 systolic array.
//
// Streams three GEMMs of different depth (K = 96 back to back, K = 64, then a
// short K = S GEMM started 64-S cycles late, as the controller does), with
// random INT8 operands, and compares each returned column with a product
// computed here. It also checks that columns leave in order 0..63 and that the
// first column of a GEMM appears K+S+1 cycles after its first slice.
module tb_systolic_array;
  import tfa_pkg::*;
  localparam int S = 4, C = 64, NG = 3;
  localparam int KMAX = 96;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last;
  data_t in_a [S];
  data_t in_b [C];
  logic [TAG_W-1:0] in_tag, out_tag;
  logic out_valid, busy;
  logic [5:0] out_col;
  acc_t out_acc [S];

  systolic_array #(.S(S)) dut (.*);

  int checks = 0, failures = 0;
  int klen [NG] = '{96, 64, S};
  data_t A [NG][S][KMAX];
  data_t Bm [NG][KMAX][C];
  int start_cyc [NG];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Driver
  initial begin
    for (int g = 0; g < NG; g++)
      for (int k = 0; k < KMAX; k++) begin
        for (int i = 0; i < S; i++) A[g][i][k] = data_t'($urandom);
        for (int j = 0; j < C; j++) Bm[g][k][j] = data_t'($urandom);
      end
    in_valid = 0; in_first = 0; in_last = 0; in_tag = '0;
    for (int i = 0; i < S; i++) in_a[i] = '0;
    for (int j = 0; j < C; j++) in_b[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int g = 0; g < NG; g++) begin
      if (klen[g] < 64) begin
        in_valid <= 0; in_first <= 0; in_last <= 0;
        repeat (64 - klen[g]) @(posedge clk);
      end
      for (int k = 0; k < klen[g]; k++) begin
        in_valid <= 1; in_first <= (k == 0); in_last <= (k == klen[g]-1);
        in_tag <= TAG_W'(g + 1);
        for (int i = 0; i < S; i++) in_a[i] <= A[g][i][k];
        for (int j = 0; j < C; j++) in_b[j] <= Bm[g][k][j];
        if (k == 0) start_cyc[g] = cyc;
        @(posedge clk);
      end
    end
    in_valid <= 0; in_first <= 0; in_last <= 0;
  end

  // Checker
  initial begin
    int g, c;
    g = 0; c = 0;
    @(posedge rst_n);
    while (g < NG) begin
      @(posedge clk);
      if (out_valid) begin
        checks++;
        if (out_col != 6'(c) || out_tag != TAG_W'(g + 1)) begin
          failures++;
          $display("order: got col %0d tag %0d, want col %0d tag %0d", out_col, out_tag, c, g+1);
        end
        if (c == 0) begin
          checks++;
          if (cyc - start_cyc[g] != klen[g] + S + 1) begin
            failures++;
            $display("latency GEMM %0d: %0d cycles, want %0d", g, cyc - start_cyc[g], klen[g] + S + 1);
          end
        end
        for (int i = 0; i < S; i++) begin
          int ref_v;
          ref_v = 0;
          for (int k = 0; k < klen[g]; k++) ref_v += int'(A[g][i][k]) * int'(Bm[g][k][c]);
          checks++;
          if (out_acc[i] !== ref_v) begin
            failures++;
            if (failures < 10) $display("GEMM %0d C(%0d,%0d) = %0d, want %0d", g, i, c, out_acc[i], ref_v);
          end
        end
        c++;
        if (c == C) begin c = 0; g++; end
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after the last column"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
