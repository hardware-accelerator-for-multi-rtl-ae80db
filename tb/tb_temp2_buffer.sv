// tb_temp2_buffer: writes s = 8 random columns into Temp2 and reads it back
// both as column words (K^T rows, zero beyond s) and as rows (V rows, zero
// beyond s), with one cycle of read latency.
module tb_temp2_buffer;
  import tfa_pkg::*;
  localparam int S = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, rd_en, rd_rows; logic [5:0] waddr, rd_addr;
  data_t wdata [S];
  data_t rd_data [64];
  temp2_buffer #(.S(S)) dut (.*);
  int M [64][S];   // M[c][r]: column c, row r
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; rd_en = 0; rd_rows = 0; waddr = 0; rd_addr = 0;
    for (int i = 0; i < S; i++) wdata[i] = '0;
    @(posedge clk);
    for (int c = 0; c < 64; c++) begin
      we <= 1; waddr <= 6'(c);
      for (int r = 0; r < S; r++) begin
        M[c][r] = int'(data_t'($urandom));
        wdata[r] <= data_t'(M[c][r]);
      end
      @(posedge clk);
    end
    we <= 0;
    for (int mode = 0; mode < 2; mode++)
      for (int k = 0; k < 64; k++) begin
        rd_en <= 1; rd_rows <= mode[0]; rd_addr <= 6'(k);
        @(posedge clk);
        rd_en <= 0;
        #1;
        for (int j = 0; j < 64; j++) begin
          int want;
          if (mode == 0) want = (k < 64 && j < S) ? M[k][j] : 0;
          else           want = (k < S) ? M[j][k] : 0;
          checks++;
          if (int'(rd_data[j]) != want) begin
            failures++;
            if (failures < 8) $display("mode %0d k %0d j %0d: %0d want %0d", mode, k, j, rd_data[j], want);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
