// tb_weight_memory: fills the h = 1 weight memory (512 words) with random
// words, reads them back in random order and checks data and the one-cycle
// read latency.
module tb_weight_memory;
  import tfa_pkg::*;
  localparam int H = 1, DEPTH = 512 * H * H;
  logic clk = 0;
  always #5 clk = ~clk;
  logic hw_en, rd_en; logic [8:0] hw_addr, rd_addr; logic [511:0] hw_data;
  data_t rd_data [64];
  weight_memory #(.H(H)) dut (.*);
  logic [511:0] ref_m [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hw_en = 0; rd_en = 0; hw_addr = 0; rd_addr = 0; hw_data = '0;
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      logic [511:0] w;
      for (int b = 0; b < 16; b++) w[b*32 +: 32] = $urandom;
      ref_m[a] = w;
      hw_en <= 1; hw_addr <= 9'(a); hw_data <= w;
      @(posedge clk);
    end
    hw_en <= 0;
    for (int n = 0; n < 300; n++) begin
      int a;
      a = int'($urandom % DEPTH);
      rd_en <= 1; rd_addr <= 9'(a);
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int j = 0; j < 64; j++) begin
        checks++;
        if (rd_data[j] != data_t'(ref_m[a][j*8 +: 8])) begin
          failures++;
          if (failures < 5) $display("word %0d byte %0d", a, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
