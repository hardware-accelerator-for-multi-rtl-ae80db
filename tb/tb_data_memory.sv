// tb_data_memory: at s = 4, h = 1 loads Q/X and K=V through the host port and
// Temp1 and P through their write ports, then reads every buffer through the
// A-operand port and Q/X through the residual port, checking data and the
// one-cycle read latency.
module tb_data_memory;
  import tfa_pkg::*;
  localparam int S = 4, H = 1, DM = 64, PN = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic hw_en, hw_sel, t1_we, p_we, rd_en;
  logic [5:0] hw_addr, t1_addr, res_addr;
  logic [7:0] p_addr, rd_addr;
  a_src_e rd_src;
  data_t hw_data [S], t1_data [S], p_data [S], rd_data [S], res_data [S];
  data_memory #(.S(S), .H(H)) dut (.*);
  int QX [DM][S], KV [DM][S], T1 [64][S], P [PN][S];
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_word(input int want [S], input data_t got [S], input string what, input int a);
    for (int i = 0; i < S; i++) begin
      checks++;
      if (int'(got[i]) != want[i]) begin
        failures++;
        if (failures < 8) $display("%s[%0d][%0d] = %0d want %0d", what, a, i, got[i], want[i]);
      end
    end
  endtask

  initial begin
    hw_en = 0; t1_we = 0; p_we = 0; rd_en = 0; hw_sel = 0; rd_src = A_QX;
    hw_addr = 0; t1_addr = 0; p_addr = 0; rd_addr = 0; res_addr = 0;
    @(posedge clk);
    for (int a = 0; a < PN; a++) begin
      hw_en <= (a < 2 * DM); hw_sel <= (a >= DM); hw_addr <= 6'(a % DM);
      t1_we <= (a < 64); t1_addr <= 6'(a % 64);
      p_we <= 1; p_addr <= 8'(a);
      for (int i = 0; i < S; i++) begin
        int v1, v2, v3;
        v1 = int'(data_t'($urandom)); v2 = int'(data_t'($urandom)); v3 = int'(data_t'($urandom));
        if (a < DM) QX[a][i] = v1; else if (a < 2 * DM) KV[a - DM][i] = v1;
        if (a < 64) T1[a][i] = v2;
        P[a][i] = v3;
        hw_data[i] <= data_t'(v1); t1_data[i] <= data_t'(v2); p_data[i] <= data_t'(v3);
      end
      @(posedge clk);
    end
    hw_en <= 0; t1_we <= 0; p_we <= 0;
    for (int a = 0; a < PN; a++) begin
      for (int src = 0; src < 4; src++) begin
        if (src != 3 && a >= 64) continue;
        rd_en <= 1; rd_src <= a_src_e'(src); rd_addr <= 8'(a); res_addr <= 6'(a % DM);
        @(posedge clk);
        rd_en <= 0;
        #1;
        case (src)
          0: check_word(QX[a], rd_data, "QX", a);
          1: check_word(KV[a], rd_data, "KV", a);
          2: check_word(T1[a], rd_data, "T1", a);
          default: check_word(P[a], rd_data, "P", a);
        endcase
        check_word(QX[a % DM], res_data, "RES", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
