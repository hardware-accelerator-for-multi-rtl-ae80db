// tb_bias_memory: fills the h = 1 bias memory (320 words), reads random
// addresses back and checks data and the one-cycle latency.
module tb_bias_memory;
  import tfa_pkg::*;
  localparam int H = 1, DEPTH = 320 * H;
  logic clk = 0;
  always #5 clk = ~clk;
  logic hw_en; logic [BADDR_W-1:0] hw_addr, rd_addr; acc_t hw_data, rd_data;
  bias_memory #(.H(H)) dut (.*);
  acc_t ref_m [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hw_en = 0; hw_addr = 0; rd_addr = 0; hw_data = 0;
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      ref_m[a] = acc_t'($urandom);
      hw_en <= 1; hw_addr <= BADDR_W'(a); hw_data <= ref_m[a];
      @(posedge clk);
    end
    hw_en <= 0;
    for (int n = 0; n < 400; n++) begin
      int a;
      a = int'($urandom % DEPTH);
      rd_addr <= BADDR_W'(a);
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != ref_m[a]) begin failures++; $display("addr %0d: %0d want %0d", a, rd_data, ref_m[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
