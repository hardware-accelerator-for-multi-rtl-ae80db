// tb_controller: the GEMM sequencer at s = 8, h = 2, for both ResBlocks.
// The datapath is modelled here: "pipe_idle" goes low with the first slice of
// a GEMM and returns 80 cycles after its last slice, the softmax stays busy
// for 150 cycles after a softmax GEMM, and LayerNorm answers 'done' 40 cycles
// after the last GEMM. Every GEMM the controller issues is compared with the
// list of Algorithm 1 built here (operand sources, depth K, weight and bias
// base, destination, column base, shift, ReLU); each GEMM's slices must be
// contiguous with consecutive addresses; GEMMs that depend on earlier results
// may only start when the modelled pipeline (and the softmax) is idle; the
// short GEMM (K = s) must be preceded by 64-s idle cycles.
module tb_controller;
  import tfa_pkg::*;
  localparam int S = 8, H = 2, DM = 64 * H, DFF = 256 * H;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start; mode_e mode; quant_cfg_t qcfg;
  logic pipe_idle, smx_busy, ln_done;
  logic rd_en, sa_first, sa_last, ln_clear, busy, done, stall, pad;
  a_src_e a_src; b_src_e b_src;
  logic [CADDR_W-1:0] a_addr; logic [WADDR_W-1:0] w_addr; tag_t sa_tag;
  controller #(.S(S), .H(H)) dut (.*);

  typedef struct {
    a_src_e a; b_src_e b; int k; int wb; dest_e d; int cb; int bb; int shamt; bit relu; bit ub; bit wt; bit ws;
  } exp_t;
  exp_t ex [$];
  int checks = 0, failures = 0;
  int pipe_cnt = 0, smx_cnt = 0, ln_cnt = -1;
  bit in_gemm = 0;
  int kcount = 0, gi = 0, last_end = 0, cyc = 0;
  exp_t cur;
  always @(posedge clk) cyc <= cyc + 1;

  assign pipe_idle = (pipe_cnt == 0) && !in_gemm;
  assign smx_busy  = (smx_cnt != 0);
  assign ln_done   = (ln_cnt == 0);

  task automatic build(input mode_e m);
    ex.delete();
    if (m == MODE_MHA) begin
      for (int hd = 0; hd < H; hd++) begin
        ex.push_back('{A_QX, B_WEIGHT, DM, 3*hd*DM,     D_T1,  0, 64*3*hd,     1, 0, 1, 0, 0});
        ex.push_back('{A_KV, B_WEIGHT, DM, (3*hd+1)*DM, D_T2,  0, 64*(3*hd+1), 2, 0, 1, 0, 0});
        ex.push_back('{A_T1, B_T2_COLS, 64, -1,         D_SMX, 0, -1,          4, 0, 0, 1, 0});
        ex.push_back('{A_KV, B_WEIGHT, DM, (3*hd+2)*DM, D_T2,  0, 64*(3*hd+2), 3, 0, 1, 0, 0});
        ex.push_back('{A_T1, B_T2_ROWS, S, -1,          D_P, 64*hd, -1,        5, 0, 0, 1, 1});
      end
      for (int hd = 0; hd < H; hd++)
        ex.push_back('{A_P, B_WEIGHT, DM, (3*H+hd)*DM, D_LN, 64*hd, 64*(3*H+hd), 6, 0, 1, hd == 0, 0});
    end else begin
      for (int i = 0; i < 4*H; i++)
        ex.push_back('{A_QX, B_WEIGHT, DM, i*DM, D_P, 64*i, 64*i, 7, 1, 1, 0, 0});
      for (int hd = 0; hd < H; hd++)
        ex.push_back('{A_P, B_WEIGHT, DFF, 4*H*DM + hd*DFF, D_LN, 64*hd, 64*(4*H+hd), 8, 0, 1, hd == 0, 0});
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (pipe_cnt > 0) pipe_cnt <= pipe_cnt - 1;
    if (smx_cnt > 0) smx_cnt <= smx_cnt - 1;
    if (ln_cnt > 0) ln_cnt <= ln_cnt - 1; else if (ln_cnt == 0) ln_cnt <= -1;
    if (rd_en) begin
      if (sa_first) begin
        checks++;
        if (gi >= ex.size()) begin failures++; $display("extra GEMM"); end
        else begin
          cur = ex[gi];
          if (a_src != cur.a || b_src != cur.b || (cur.wb >= 0 && int'(w_addr) != cur.wb) ||
              sa_tag.dest != cur.d || int'(sa_tag.col_base) != cur.cb ||
              (cur.bb >= 0 && int'(sa_tag.bias_base) != cur.bb) || int'(sa_tag.shift) != cur.shamt ||
              sa_tag.relu != cur.relu || sa_tag.use_bias != cur.ub) begin
            failures++;
            $display("GEMM %0d: a %0d b %0d w %0d dest %0d col %0d bias %0d sh %0d relu %0d", gi,
                     a_src, b_src, w_addr, sa_tag.dest, sa_tag.col_base, sa_tag.bias_base, sa_tag.shift, sa_tag.relu);
          end
          if (cur.wt) begin
            checks++;
            if (pipe_cnt != 0 || (cur.ws && smx_cnt != 0)) begin
              failures++; $display("GEMM %0d started before its inputs were ready", gi);
            end
          end
          if (cur.k < 64) begin
            checks++;
            if (cyc - last_end < 64 - cur.k + 1) begin
              failures++; $display("GEMM %0d: only %0d idle cycles", gi, cyc - last_end - 1);
            end
          end
        end
        in_gemm <= 1;
        kcount = 0;
      end
      checks++;
      if (int'(a_addr) != kcount || (cur.b == B_WEIGHT && int'(w_addr) != cur.wb + kcount)) begin
        failures++; $display("GEMM %0d slice %0d: address %0d / %0d", gi, kcount, a_addr, w_addr);
      end
      kcount++;
      if (sa_last) begin
        checks++;
        if (kcount != cur.k) begin failures++; $display("GEMM %0d: %0d slices, want %0d", gi, kcount, cur.k); end
        in_gemm <= 0;
        pipe_cnt <= 80;
        if (cur.d == D_SMX) smx_cnt <= 150;
        last_end = cyc;
        gi++;
        if (gi == ex.size()) ln_cnt <= 40;
      end
    end else if (in_gemm) begin
      checks++; failures++; $display("GEMM %0d: gap inside the GEMM", gi);
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; mode = MODE_MHA;
    qcfg.q = 1; qcfg.k = 2; qcfg.v = 3; qcfg.qk = 4; qcfg.pv = 5; qcfg.g = 6; qcfg.f1 = 7; qcfg.f2 = 8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      int npad;
      build(mode_e'(m));
      gi = 0;
      @(posedge clk);
      mode <= mode_e'(m); start <= 1;
      @(posedge clk);
      start <= 0;
      npad = 0;
      while (!done) begin @(posedge clk); if (pad) npad++; end
      checks++;
      if (gi != ex.size()) begin failures++; $display("mode %0d: %0d GEMMs, want %0d", m, gi, ex.size()); end
      checks++;
      if (npad != ((m == 0) ? H * (64 - S) : 0)) begin failures++; $display("pad cycles %0d", npad); end
      @(posedge clk);
      checks++;
      if (busy) begin failures++; $display("busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
