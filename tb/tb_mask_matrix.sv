// tb_mask_matrix: writes random rows into the 8 x 8 mask and reads every
// column back, comparing with the matrix kept here.
module tb_mask_matrix;
  localparam int S = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we; logic [2:0] waddr, rd_col; logic [S-1:0] wdata, rd_data;
  mask_matrix #(.S(S)) dut (.*);
  bit M [S][S];
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; rd_col = 0;
    for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) M[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int i = 0; i < S; i++) begin
        logic [S-1:0] w;
        w = S'($urandom);
        we <= 1; waddr <= 3'(i); wdata <= w;
        for (int j = 0; j < S; j++) M[i][j] = w[j];
        @(posedge clk);
      end
      we <= 0;
      @(posedge clk);
      for (int j = 0; j < S; j++) begin
        rd_col = 3'(j);
        #1;
        for (int i = 0; i < S; i++) begin
          checks++;
          if (rd_data[i] != M[i][j]) begin failures++; $display("M(%0d,%0d)", i, j); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
