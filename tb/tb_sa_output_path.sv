// tb_sa_output_path: the bias / ReLU / residual adders at s = 4. Sends 400
// random columns back to back, each with a random destination, shift, bias
// use and ReLU flag; the bias and residual memories are modelled here with
// their one-cycle latency. Every result is compared with the rounding,
// saturation, ReLU and residual rules computed here, and the output must
// follow its input column by exactly two cycles.
module tb_sa_output_path;
  import tfa_pkg::*;
  localparam int S = 4, QA_W = 6, N = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid, busy, relu_clamp;
  logic [5:0] in_col;
  acc_t in_acc [S];
  tag_t in_tag;
  logic [BADDR_W-1:0] bias_addr;
  acc_t bias_data;
  logic [QA_W-1:0] res_addr;
  data_t res_data [S];
  dest_e out_dest;
  logic [CADDR_W-1:0] out_col;
  val_t out_val [S];
  sa_output_path #(.S(S), .QA_W(QA_W)) dut (.*);

  acc_t bmem [1 << BADDR_W];
  int rmem [64][S];
  always @(posedge clk) begin
    bias_data <= bmem[bias_addr];
    for (int i = 0; i < S; i++) res_data[i] <= data_t'(rmem[res_addr][i]);
  end

  int exp_val [N][S]; dest_e exp_dest [N]; int exp_col [N];
  int checks = 0, failures = 0, sent = 0, got = 0;

  function automatic int satw(input longint x, input int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w-1)) - 1; lo = -(64'sd1 <<< (w-1));
    return int'((x > hi) ? hi : (x < lo) ? lo : x);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < (1 << BADDR_W); a++) bmem[a] = acc_t'(int'($urandom % 200001) - 100000);
    for (int a = 0; a < 64; a++) for (int i = 0; i < S; i++) rmem[a][i] = int'(data_t'($urandom));
    in_valid = 0; in_col = 0; in_tag = '0;
    for (int i = 0; i < S; i++) in_acc[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      tag_t t;
      int c;
      t = '0;
      t.dest = dest_e'($urandom % 5);
      t.use_bias = $urandom % 2;
      t.bias_base = BADDR_W'($urandom % 4000);
      t.col_base = (t.dest == D_LN) ? CADDR_W'(($urandom % 2) * 32) : CADDR_W'($urandom % 1000);
      t.relu = (t.dest == D_P) && ($urandom % 2);
      t.shift = SHIFT_W'($urandom % 12);
      c = (t.dest == D_LN) ? int'($urandom % 32) : int'($urandom % 64);
      in_valid <= 1; in_col <= 6'(c); in_tag <= t;
      exp_dest[n] = t.dest;
      exp_col[n] = (t.dest == D_SMX) ? c : int'(t.col_base) + c;
      for (int i = 0; i < S; i++) begin
        longint x, r; int q8, a;
        a = int'($urandom % 400001) - 200000;
        in_acc[i] <= acc_t'(a);
        x = longint'(a) + (t.use_bias ? longint'(bmem[int'(t.bias_base) + c]) : 0);
        r = (t.shift == 0) ? x : (x + (64'sd1 <<< (t.shift - 1))) >>> t.shift;
        q8 = satw(r, 8);
        case (t.dest)
          D_SMX: exp_val[n][i] = satw(r, 16);
          D_LN:  exp_val[n][i] = q8 + rmem[int'(t.col_base) + c][i];
          default: exp_val[n][i] = (t.relu && q8 < 0) ? 0 : q8;
        endcase
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("%0d columns out, want %0d", got, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output n must appear in the cycle two edges after input n was sampled.
  int in_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (in_cnt < N && got != in_cnt - 2) begin failures++; $display("latency: output %0d after input %0d", got, in_cnt); end
      checks++;
      if (out_dest != exp_dest[got] || int'(out_col) != exp_col[got]) begin
        failures++; $display("column %0d: dest %0d col %0d, want %0d %0d", got, out_dest, out_col, exp_dest[got], exp_col[got]);
      end
      for (int i = 0; i < S; i++) begin
        checks++;
        if (int'(out_val[i]) != exp_val[got][i]) begin
          failures++;
          if (failures < 10) $display("column %0d row %0d: %0d want %0d", got, i, out_val[i], exp_val[got][i]);
        end
      end
      got++;
    end
    if (in_valid) in_cnt++;
  end
endmodule
