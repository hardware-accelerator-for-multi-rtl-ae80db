// controller: sequences the GEMMs of one MHA or FFN ResBlock (the paper's Algorithm 1).
//
// MHA, for each head i (five GEMMs), then h output GEMMs:
//   1 Temp1 = Q W_Qi + b          A = Q,     B = W, K = 64h
//   2 Temp2 = K W_Ki + b          A = K=V,   B = W, K = 64h
//   3 D     = Temp1 Temp2^T       A = Temp1, B = Temp2 columns, K = 64  -> softmax
//   4 Temp2 = V W_Vi + b          A = K=V,   B = W, K = 64h   (softmax runs meanwhile)
//   5 P_i   = Y Temp2             A = Temp1 (Y), B = Temp2 rows, K = s -> P[:, 64i..]
//   G_i = P W_Gi + b + Q_i        A = P,     B = W, K = 64h   -> LayerNorm
// FFN: for i < 4h, P_i = ReLU(X W1_i + b1_i) (K = 64h); then for i < h,
//   G_i = P W2_i + b2_i + X_i (K = 256h) -> LayerNorm.
// The order of the GEMMs is the paper's. The waits are this design's reading
// of the data dependencies: GEMM 3 waits until Temp1 and Temp2 are written,
// GEMM 5 until V W_Vi + b is written and the softmax has finished, and the
// first G GEMM until all of P is written ("pipe_idle" = no result in flight).
// A GEMM with K < 64 is started 64-K cycles late so that its result columns do
// not collide with the previous GEMM's (only GEMM 5 when s < 64).
//
// Outputs are read requests for the operand memories plus the framing of each
// k-slice (first, last, tag); the data arrive one cycle later, and the top
// delays the framing by the same cycle. 'done' pulses when LayerNorm has sent
// its last column. Weight layout (words of one 64-wide row): MHA block b at
// b*64h, b = 3i, 3i+1, 3i+2 for W_Qi, W_Ki, W_Vi and 3h+i for W_Gi; FFN W1_i at
// i*64h and W2_i at 4h*64h + i*256h. The biases of block b are at b*64.
module controller
  import tfa_pkg::*;
#(
  parameter int S = 64,
  parameter int H = 8,
  localparam int DM  = 64 * H,
  localparam int DFF = 256 * H
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  mode_e              mode,
  input  quant_cfg_t         qcfg,
  input  logic               pipe_idle,
  input  logic               smx_busy,
  input  logic               ln_done,
  output logic               rd_en,
  output a_src_e             a_src,
  output logic [CADDR_W-1:0] a_addr,
  output b_src_e             b_src,
  output logic [WADDR_W-1:0] w_addr,
  output logic               sa_first,
  output logic               sa_last,
  output tag_t               sa_tag,
  output logic               ln_clear,
  output logic               busy,
  output logic               done,
  output logic               stall,      // waiting on a data dependency
  output logic               pad         // idle slot before a short GEMM
);
  typedef struct packed {
    a_src_e              a_src;
    b_src_e              b_src;
    logic [KLEN_W-1:0]   k_len;
    logic [WADDR_W-1:0]  w_base;
    tag_t                tag;
    logic                wait_prev;
    logic                wait_smx;
  } step_t;

  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_WAIT, C_PAD, C_FEED, C_LNWAIT} cstate_e;
  cstate_e st;

  mode_e mode_q;
  int unsigned idx;
  step_t cur;
  logic [KLEN_W-1:0] k;
  logic [6:0] pcnt;
  logic wait1;

  function automatic int unsigned n_steps(input mode_e m);
    return (m == MODE_MHA) ? 6 * H : 5 * H;
  endfunction

  function automatic step_t step_of(input mode_e m, input int unsigned n, input quant_cfg_t q);
    step_t s;
    int unsigned hd, sub, b;
    s = '0;
    s.b_src = B_WEIGHT;
    s.tag.use_bias = 1'b1;
    s.k_len = KLEN_W'(DM);
    if (m == MODE_MHA) begin
      if (n < 5 * H) begin
        hd  = n / 5;
        sub = n % 5;
        case (sub)
          0: begin b = 3*hd;     s.a_src = A_QX; s.tag.dest = D_T1; s.tag.shift = q.q; end
          1: begin b = 3*hd + 1; s.a_src = A_KV; s.tag.dest = D_T2; s.tag.shift = q.k; end
          2: begin
            b = 0; s.a_src = A_T1; s.b_src = B_T2_COLS; s.k_len = KLEN_W'(DK);
            s.tag.dest = D_SMX; s.tag.shift = q.qk; s.tag.use_bias = 1'b0; s.wait_prev = 1'b1;
          end
          3: begin b = 3*hd + 2; s.a_src = A_KV; s.tag.dest = D_T2; s.tag.shift = q.v; end
          default: begin
            b = 0; s.a_src = A_T1; s.b_src = B_T2_ROWS; s.k_len = KLEN_W'(S);
            s.tag.dest = D_P; s.tag.col_base = CADDR_W'(64 * hd); s.tag.shift = q.pv;
            s.tag.use_bias = 1'b0; s.wait_prev = 1'b1; s.wait_smx = 1'b1;
          end
        endcase
      end else begin
        hd = n - 5 * H;
        b  = 3 * H + hd;
        s.a_src = A_P; s.tag.dest = D_LN; s.tag.col_base = CADDR_W'(64 * hd);
        s.tag.shift = q.g; s.wait_prev = (hd == 0);
      end
    end else begin
      if (n < 4 * H) begin
        b = n;
        s.a_src = A_QX; s.tag.dest = D_P; s.tag.col_base = CADDR_W'(64 * n);
        s.tag.relu = 1'b1; s.tag.shift = q.f1;
      end else begin
        hd = n - 4 * H;
        b  = 4 * H + hd;
        s.a_src = A_P; s.k_len = KLEN_W'(DFF); s.tag.dest = D_LN;
        s.tag.col_base = CADDR_W'(64 * hd); s.tag.shift = q.f2; s.wait_prev = (hd == 0);
      end
    end
    s.tag.bias_base = BADDR_W'(64 * b);
    if (m == MODE_FFN && n >= 4 * H)
      s.w_base = WADDR_W'(4 * H * DM + (n - 4 * H) * DFF);
    else
      s.w_base = WADDR_W'(b * DM);
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; mode_q <= MODE_MHA; idx <= 0; cur <= '0; k <= '0; pcnt <= '0;
      done <= 1'b0; wait1 <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        C_IDLE: if (start) begin
          mode_q <= mode;
          idx    <= 0;
          st     <= C_LOAD;
        end
        C_LOAD: begin
          cur   <= step_of(mode_q, idx, qcfg);
          wait1 <= 1'b1;
          st    <= C_WAIT;
        end
        C_WAIT: begin
          wait1 <= 1'b0;
          if (!cur.wait_prev || (!wait1 && pipe_idle && !(cur.wait_smx && smx_busy))) begin
            k <= '0;
            if (cur.k_len < KLEN_W'(DK)) begin
              pcnt <= 7'(DK) - 7'(cur.k_len);
              st   <= C_PAD;
            end else begin
              st <= C_FEED;
            end
          end
        end
        C_PAD: begin
          pcnt <= pcnt - 1'b1;
          if (pcnt == 7'd1) st <= C_FEED;
        end
        C_FEED: begin
          k <= k + 1'b1;
          if (k == cur.k_len - 1'b1) begin
            if (idx + 1 == n_steps(mode_q)) begin
              st <= C_LNWAIT;
            end else begin
              idx <= idx + 1;
              st  <= C_LOAD;
            end
          end
        end
        default: begin  // C_LNWAIT
          if (ln_done) begin
            done <= 1'b1;
            st   <= C_IDLE;
          end
        end
      endcase
    end
  end

  always_comb begin
    rd_en    = (st == C_FEED);
    a_src    = cur.a_src;
    a_addr   = CADDR_W'(k);
    b_src    = cur.b_src;
    w_addr   = cur.w_base + WADDR_W'(k);
    sa_first = (st == C_FEED) && (k == '0);
    sa_last  = (st == C_FEED) && (k == cur.k_len - 1'b1);
    sa_tag   = cur.tag;
    ln_clear = (st == C_IDLE) && start;
    busy     = (st != C_IDLE);
    stall    = (st == C_WAIT) && cur.wait_prev &&
               (wait1 || !pipe_idle || (cur.wait_smx && smx_busy));
    pad      = (st == C_PAD);
  end
endmodule
