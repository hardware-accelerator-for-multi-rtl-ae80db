// tfa_tb_body.svh: end-to-end stimulus, reference model and checks for tfa_top.
//
// Included by tb_tfa_top (reduced size) and tb_tfa_full (default size). The
// including module declares S, H and the DUT instance 'dut' with the signals
// below. The body loads random Q, K=V, weights, biases, a causal mask and
// gamma/beta through the host ports, runs one MHA ResBlock and then one FFN
// ResBlock, and checks:
//   * every G column entering LayerNorm, bit for bit, against a reference
//     computed here from the same fixed-point rules (requantisation, the
//     shift-add EXP / LN approximations of the softmax);
//   * every output value against a LayerNorm computed here with a real
//     square root (within 2 LSB, the error allowed to the x^-0.5 table);
//   * the number of k-slices fed to the SA (exactly the sum of all K);
//   * the cycle count against a bound;
//   * that each mechanism happened: dependency stalls, padding before a
//   short GEMM (only when s < 64), ReLU clamping, masking, both modes.

  localparam int DM  = 64 * H;
  localparam int DFF = 256 * H;
  localparam int DFRAC = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start; mode_e mode; quant_cfg_t qcfg; logic busy, done;
  logic hw_act_en, hw_act_sel; logic [$clog2(DM)-1:0] hw_act_addr; data_t hw_act_data [S];
  logic hw_w_en; logic [$clog2(512*H*H)-1:0] hw_w_addr; logic [DK*8-1:0] hw_w_data;
  logic hw_b_en; logic [BADDR_W-1:0] hw_b_addr; acc_t hw_b_data;
  logic hw_m_en; logic [((S > 1) ? $clog2(S) : 1)-1:0] hw_m_addr; logic [S-1:0] hw_m_data;
  logic hw_ln_en; logic [$clog2(DM)-1:0] hw_ln_addr; data_t hw_ln_gamma, hw_ln_beta;
  logic out_valid; logic [$clog2(DM)-1:0] out_col; data_t out_data [S];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- test data ----------------
  int Qm [S][DM];  int KVm [S][DM];  int Xm [S][DM];
  int WQ [DM][DM]; int WK [DM][DM];  int WV [DM][DM]; int WG [DM][DM];
  int bQ [DM]; int bK [DM]; int bV [DM]; int bG [DM];
  int W1 [DM][DFF]; int W2 [DFF][DM]; int b1 [DFF]; int b2 [DM];
  int gam [DM]; int bet [DM];
  bit Mk [S][S];
  int Gref [S][DM];
  int outm [S][DM];

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int sat_i(input longint x, input int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w-1)) - 1; lo = -(64'sd1 <<< (w-1));
    return int'((x > hi) ? hi : (x < lo) ? lo : x);
  endfunction

  function automatic longint rshift_round(input longint x, input int sh);
    if (sh == 0) return x;
    return (x + (64'sd1 <<< (sh-1))) >>> sh;
  endfunction

  // Model of the shift-add exponential (z <= 0, Q.8) -> Q0.15.
  function automatic int exp_m(input longint z);
    longint t, u; int v;
    t = z + (z >>> 1) - (z >>> 4);
    u = t >>> 8;
    v = int'(t - (u <<< 8));
    if (-u >= 16) return 0;
    return ((256 + v) << 7) >> (-u);
  endfunction

  // Model of the leading-one logarithm, x in Q.15 -> ln in Q.8.
  function automatic int ln_m(input longint x);
    int w; longint k, l2;
    if (x == 0) return 0;
    w = 0;
    for (int b = 0; b < 40; b++) if (x[b]) w = b;
    if (w >= 8) k = (x - (64'sd1 <<< w)) >>> (w - 8);
    else        k = (x - (64'sd1 <<< w)) <<< (8 - w);
    l2 = (longint'(w - 15) <<< 8) + k;
    return int'((l2 >>> 1) + (l2 >>> 3) + (l2 >>> 4) + (l2 >>> 8));
  endfunction

  // One softmax row: D (16-bit, DFRAC) and mask -> Y (Q0.7).
  task automatic softmax_row(input int d [S], input bit m [S], output int y [S]);
    longint x [S]; longint mx; bit any; longint sum; int l;
    any = 0; mx = 0; sum = 0;
    for (int j = 0; j < S; j++) begin
      x[j] = (longint'(d[j]) <<< 8) >>> (DFRAC + 3);
      if (!m[j] && (!any || x[j] > mx)) begin mx = x[j]; any = 1; end
    end
    for (int j = 0; j < S; j++) if (!m[j]) sum += exp_m(x[j] - mx);
    l = ln_m(sum);
    for (int j = 0; j < S; j++) begin
      int e, r;
      e = exp_m(x[j] - mx - l);
      r = (e + 128) >> 8;
      y[j] = (m[j] || !any) ? 0 : (r > 127 ? 127 : r);
    end
  endtask

  // ---------------- reference ResBlocks ----------------
  task automatic ref_mha(input quant_cfg_t q);
    int T1 [S][64]; int T2k [S][64]; int T2v [S][64]; int P [S][DM];
    for (int hd = 0; hd < H; hd++) begin
      for (int r = 0; r < S; r++)
        for (int c = 0; c < 64; c++) begin
          longint aq, ak, av;
          aq = bQ[64*hd+c]; ak = bK[64*hd+c]; av = bV[64*hd+c];
          for (int k = 0; k < DM; k++) begin
            aq += Qm[r][k] * WQ[k][64*hd+c];
            ak += KVm[r][k] * WK[k][64*hd+c];
            av += KVm[r][k] * WV[k][64*hd+c];
          end
          T1[r][c]  = sat_i(rshift_round(aq, q.q), 8);
          T2k[r][c] = sat_i(rshift_round(ak, q.k), 8);
          T2v[r][c] = sat_i(rshift_round(av, q.v), 8);
        end
      for (int r = 0; r < S; r++) begin
        int d [S]; bit m [S]; int y [S];
        for (int j = 0; j < S; j++) begin
          longint a;
          a = 0;
          for (int c = 0; c < 64; c++) a += T1[r][c] * T2k[j][c];
          d[j] = sat_i(rshift_round(a, q.qk), 16);
          m[j] = Mk[r][j];
        end
        softmax_row(d, m, y);
        for (int c = 0; c < 64; c++) begin
          longint a;
          a = 0;
          for (int j = 0; j < S; j++) a += y[j] * T2v[j][c];
          P[r][64*hd+c] = sat_i(rshift_round(a, q.pv), 8);
        end
      end
    end
    for (int r = 0; r < S; r++)
      for (int n = 0; n < DM; n++) begin
        longint a;
        a = bG[n];
        for (int k = 0; k < DM; k++) a += P[r][k] * WG[k][n];
        Gref[r][n] = sat_i(rshift_round(a, q.g), 8) + Qm[r][n];
      end
  endtask

  task automatic ref_ffn(input quant_cfg_t q);
    int P [S][DFF];
    for (int r = 0; r < S; r++)
      for (int m = 0; m < DFF; m++) begin
        longint a; int v;
        a = b1[m];
        for (int k = 0; k < DM; k++) a += Xm[r][k] * W1[k][m];
        v = sat_i(rshift_round(a, q.f1), 8);
        P[r][m] = (v < 0) ? 0 : v;
      end
    for (int r = 0; r < S; r++)
      for (int n = 0; n < DM; n++) begin
        longint a;
        a = b2[n];
        for (int m = 0; m < DFF; m++) a += P[r][m] * W2[m][n];
        Gref[r][n] = sat_i(rshift_round(a, q.f2), 8) + Xm[r][n];
      end
  endtask

  // LayerNorm reference with a real square root; fixed-point mean as in the design.
  function automatic int ln_ref(input int r, input int n);
    longint s1, s2, efx, eg2, v;
    real rr, val;
    longint recip;
    s1 = 0; s2 = 0;
    for (int t = 0; t < DM; t++) begin s1 += Gref[r][t]; s2 += Gref[r][t] * Gref[r][t]; end
    recip = (64'sd1 <<< 20) / DM;
    efx = (s1 * recip) >>> 12;
    eg2 = (s2 * recip) >>> 4;
    v = eg2 - efx * efx;
    if (v < 0) v = 0;
    v = v + 1;
    rr = 1.0 / $sqrt(real'(v) / 65536.0);
    val = ((real'(Gref[r][n]) * 256.0 - real'(efx)) / 256.0) * rr * (real'(gam[n]) / 64.0)
          + real'(bet[n]) / 16.0;
    val = val * 16.0;
    return sat_i(longint'($floor(val + 0.5)), 8);
  endfunction

  // ---------------- host loading ----------------
  task automatic host_idle();
    start = 0; hw_act_en = 0; hw_w_en = 0; hw_b_en = 0; hw_m_en = 0; hw_ln_en = 0;
  endtask

  task automatic load_act(input bit sel, input int m [S][DM]);
    for (int t = 0; t < DM; t++) begin
      hw_act_en <= 1; hw_act_sel <= sel; hw_act_addr <= ($clog2(DM))'(t);
      for (int i = 0; i < S; i++) hw_act_data[i] <= data_t'(m[i][t]);
      @(posedge clk);
    end
    hw_act_en <= 0;
  endtask

  task automatic load_wblock(input int addr0, input int rows, input int which, input int col0);
    for (int k = 0; k < rows; k++) begin
      hw_w_en <= 1; hw_w_addr <= ($clog2(512*H*H))'(addr0 + k);
      for (int j = 0; j < 64; j++) begin
        int w;
        case (which)
          0: w = WQ[k][col0+j];
          1: w = WK[k][col0+j];
          2: w = WV[k][col0+j];
          3: w = WG[k][col0+j];
          4: w = W1[k][col0+j];
          default: w = W2[k][col0+j];
        endcase
        hw_w_data[j*8 +: 8] <= 8'(w);
      end
      @(posedge clk);
    end
    hw_w_en <= 0;
  endtask

  task automatic load_bias(input int addr0, input int which, input int col0);
    for (int c = 0; c < 64; c++) begin
      hw_b_en <= 1; hw_b_addr <= BADDR_W'(addr0 + c);
      case (which)
        0: hw_b_data <= bQ[col0+c];
        1: hw_b_data <= bK[col0+c];
        2: hw_b_data <= bV[col0+c];
        3: hw_b_data <= bG[col0+c];
        4: hw_b_data <= b1[col0+c];
        default: hw_b_data <= b2[col0+c];
      endcase
      @(posedge clk);
    end
    hw_b_en <= 0;
  endtask

  task automatic load_ln();
    for (int t = 0; t < DM; t++) begin
      hw_ln_en <= 1; hw_ln_addr <= ($clog2(DM))'(t);
      hw_ln_gamma <= data_t'(gam[t]); hw_ln_beta <= data_t'(bet[t]);
      @(posedge clk);
    end
    hw_ln_en <= 0;
  endtask

  // ---------------- monitors ----------------
  int n_stall = 0, n_pad = 0, n_relu = 0, n_feed = 0, n_smx = 0, n_gcols = 0, n_outcols = 0;
  int g_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.stall) n_stall++;
    if (dut.u_ctrl.pad)   n_pad++;
    if (dut.relu_clamp)   n_relu++;
    if (dut.rd_en)        n_feed++;
    if (dut.smx_ovalid)   n_smx++;
    if (dut.op_valid && dut.op_dest == D_LN) begin
      n_gcols++;
      for (int i = 0; i < S; i++) begin
        checks++;
        if (int'(dut.op_val[i]) != Gref[i][int'(dut.op_col)]) begin
          failures++; g_bad++;
          if (g_bad < 8) $display("G(%0d,%0d) = %0d, want %0d", i, dut.op_col, dut.op_val[i], Gref[i][int'(dut.op_col)]);
        end
      end
    end
    if (out_valid) begin
      n_outcols++;
      for (int i = 0; i < S; i++) outm[i][int'(out_col)] = int'(out_data[i]);
    end
  end

  task automatic run_and_check(input mode_e m, input int kslices, input int bound, input string name);
    int t0, t1, nf0, bad, maxerr;
    nf0 = n_feed;
    n_outcols = 0;
    mode <= m; start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    t1 = cyc;
    @(posedge clk);
    $display("%s: %0d cycles from start to done, %0d k-slices fed", name, t1 - t0, n_feed - nf0);
    checks++;
    if (n_feed - nf0 != kslices) begin
      failures++; $display("%s: %0d k-slices fed, want %0d", name, n_feed - nf0, kslices);
    end
    checks++;
    if (t1 - t0 > bound) begin
      failures++; $display("%s: %0d cycles, bound %0d", name, t1 - t0, bound);
    end
    checks++;
    if (n_outcols != DM) begin failures++; $display("%s: %0d output columns", name, n_outcols); end
    bad = 0; maxerr = 0;
    for (int r = 0; r < S; r++)
      for (int n = 0; n < DM; n++) begin
        int e, d;
        e = ln_ref(r, n);
        d = (outm[r][n] > e) ? outm[r][n] - e : e - outm[r][n];
        if (d > maxerr) maxerr = d;
        checks++;
        if (d > 2) begin
          failures++; bad++;
          if (bad < 8) $display("%s out(%0d,%0d) = %0d, want %0d", name, r, n, outm[r][n], e);
        end
      end
    $display("%s: largest output error %0d LSB", name, maxerr);
  endtask

  initial begin
    quant_cfg_t q;
    int sh;
    int ks_mha, ks_ffn;
    host_idle();
    mode = MODE_MHA;
    sh = ($clog2(DM) + 1) / 2 + 3;
    q.q = 5'(sh); q.k = 5'(sh); q.v = 5'(sh); q.qk = 5'd4; q.pv = 5'd7;
    q.g = 5'(sh); q.f1 = 5'(sh); q.f2 = 5'(sh + 1);
    qcfg = q;
    for (int r = 0; r < S; r++)
      for (int n = 0; n < DM; n++) begin
        Qm[r][n] = rnd(-32, 31); KVm[r][n] = rnd(-32, 31); Xm[r][n] = rnd(-32, 31);
      end
    for (int k = 0; k < DM; k++)
      for (int n = 0; n < DM; n++) begin
        WQ[k][n] = rnd(-16, 15); WK[k][n] = rnd(-16, 15); WV[k][n] = rnd(-16, 15); WG[k][n] = rnd(-16, 15);
      end
    for (int k = 0; k < DM; k++) for (int m = 0; m < DFF; m++) W1[k][m] = rnd(-16, 15);
    for (int m = 0; m < DFF; m++) for (int n = 0; n < DM; n++) W2[m][n] = rnd(-16, 15);
    for (int n = 0; n < DM; n++) begin
      bQ[n] = rnd(-2000, 2000); bK[n] = rnd(-2000, 2000); bV[n] = rnd(-2000, 2000); bG[n] = rnd(-2000, 2000);
      b2[n] = rnd(-2000, 2000); gam[n] = rnd(40, 90); bet[n] = rnd(-16, 16);
    end
    for (int m = 0; m < DFF; m++) b1[m] = rnd(-3000, 1000);
    for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) Mk[i][j] = (j > i);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- MHA ----
    load_act(0, Qm);
    load_act(1, KVm);
    for (int hd = 0; hd < H; hd++) begin
      load_wblock((3*hd)   * DM, DM, 0, 64*hd); load_bias((3*hd)   * 64, 0, 64*hd);
      load_wblock((3*hd+1) * DM, DM, 1, 64*hd); load_bias((3*hd+1) * 64, 1, 64*hd);
      load_wblock((3*hd+2) * DM, DM, 2, 64*hd); load_bias((3*hd+2) * 64, 2, 64*hd);
      load_wblock((3*H+hd) * DM, DM, 3, 64*hd); load_bias((3*H+hd) * 64, 3, 64*hd);
    end
    for (int i = 0; i < S; i++) begin
      hw_m_en <= 1; hw_m_addr <= 6'(i);
      for (int j = 0; j < S; j++) hw_m_data[j] <= Mk[i][j];
      @(posedge clk);
    end
    hw_m_en <= 0;
    load_ln();
    ref_mha(q);
    ks_mha = H * (3 * DM + 64 + S) + H * DM;
    run_and_check(MODE_MHA, ks_mha, MHA_BOUND, "MHA");
    checks++;
    if (n_smx != H * S) begin failures++; $display("softmax output columns %0d, want %0d", n_smx, H * S); end

    // ---- FFN ----
    load_act(0, Xm);
    for (int i = 0; i < 4*H; i++) begin
      load_wblock(i * DM, DM, 4, 64*i); load_bias(i * 64, 4, 64*i);
    end
    for (int i = 0; i < H; i++) begin
      load_wblock(4*H*DM + i*DFF, DFF, 5, 64*i); load_bias((4*H+i) * 64, 5, 64*i);
    end
    for (int n = 0; n < DM; n++) begin gam[n] = rnd(40, 90); bet[n] = rnd(-16, 16); end
    load_ln();
    ref_ffn(q);
    ks_ffn = 4 * H * DM + H * DFF;
    run_and_check(MODE_FFN, ks_ffn, FFN_BOUND, "FFN");

    // ---- mechanisms ----
    $display("mechanisms: stall cycles %0d, pad cycles %0d, ReLU-clamped columns %0d, softmax columns %0d, G columns %0d",
             n_stall, n_pad, n_relu, n_smx, n_gcols);
    checks++; if (n_stall == 0) begin failures++; $display("no dependency stall happened"); end
    checks++;
    if ((S < 64) != (n_pad > 0)) begin failures++; $display("padding count %0d unexpected for s = %0d", n_pad, S); end
    checks++; if (n_relu == 0) begin failures++; $display("ReLU never clamped"); end
    checks++; if (n_gcols != 2 * DM) begin failures++; $display("G columns %0d, want %0d", n_gcols, 2 * DM); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
