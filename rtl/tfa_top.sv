// tfa_top: accelerator for the MHA and FFN ResBlocks of a Transformer.
//
// One s x 64 INT8 systolic array (SA) does every matrix product of both
// ResBlocks. The large weight matrices W_G, W1 and W2 are cut into 64-column
// blocks so each product is an (s x K) x (K x 64) GEMM; the controller runs the
// GEMMs of the chosen ResBlock in the order of the paper's Algorithm 1. Result
// columns leave the SA one per cycle, get their bias added and are requantised
// (sa_output_path), then go to Temp1, Temp2, the P buffer (through ReLU in the
// FFN), the softmax, or, with the residual Q or X added, to LayerNorm, whose
// output columns are the ResBlock's output.
//
// Host interface (this design's; the paper describes none): before 'start',
// load Q/X and K=V column by column (hw_act_*: column t of the s x 64h matrix,
// one INT8 per row), the ResBlock's weights (hw_w_*: one 64-element row of a
// weight block per word, layout in controller.sv), the biases (hw_b_*), the
// attention mask row by row (hw_m_*, MHA) and gamma/beta (hw_ln_*). Set qcfg
// (requantisation shifts) and mode, pulse 'start'. The output matrix
// (s x 64h, INT8) appears on out_* one column per cycle, out_col = 0 .. 64h-1,
// and 'done' pulses after the last column.
//
// Timing at s = 64, h = 8: see the README for cycle counts; the SA is fed
// without gaps except where a GEMM needs a result that is still in flight.
module tfa_top
  import tfa_pkg::*;
#(
  parameter int S = 64,
  parameter int H = 8,
  localparam int DM   = 64 * H,
  localparam int QA_W = $clog2(DM),
  localparam int WA_W = $clog2(512 * H * H),
  localparam int SA_W = (S > 1) ? $clog2(S) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start,
  input  mode_e               mode,
  input  quant_cfg_t          qcfg,
  output logic                busy,
  output logic                done,
  // host loading
  input  logic                hw_act_en,
  input  logic                hw_act_sel,      // 0: Q or X, 1: K=V
  input  logic [QA_W-1:0]     hw_act_addr,
  input  data_t               hw_act_data [S],
  input  logic                hw_w_en,
  input  logic [WA_W-1:0]     hw_w_addr,
  input  logic [DK*DATA_W-1:0] hw_w_data,
  input  logic                hw_b_en,
  input  logic [BADDR_W-1:0]  hw_b_addr,
  input  acc_t                hw_b_data,
  input  logic                hw_m_en,
  input  logic [SA_W-1:0]     hw_m_addr,
  input  logic [S-1:0]        hw_m_data,
  input  logic                hw_ln_en,
  input  logic [QA_W-1:0]     hw_ln_addr,
  input  data_t               hw_ln_gamma,
  input  data_t               hw_ln_beta,
  // result
  output logic                out_valid,
  output logic [QA_W-1:0]     out_col,
  output data_t               out_data [S]
);
  localparam int PA_W = $clog2(256 * H);
  localparam int TA_W = $clog2((S > 64) ? S : 64);

  // ---------------- controller ----------------
  logic rd_en, c_first, c_last, ln_clear, pipe_idle, smx_busy, ln_done, stall, pad;
  a_src_e a_src;
  b_src_e b_src;
  logic [CADDR_W-1:0] a_addr;
  logic [WADDR_W-1:0] w_addr;
  tag_t c_tag;

  controller #(.S(S), .H(H)) u_ctrl (
    .clk, .rst_n, .start, .mode, .qcfg, .pipe_idle, .smx_busy, .ln_done,
    .rd_en, .a_src, .a_addr, .b_src, .w_addr,
    .sa_first(c_first), .sa_last(c_last), .sa_tag(c_tag),
    .ln_clear, .busy, .done, .stall, .pad
  );

  // Framing delayed by the one-cycle memory read.
  logic f_valid, f_first, f_last;
  tag_t f_tag;
  b_src_e f_bsrc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_valid <= 1'b0; f_first <= 1'b0; f_last <= 1'b0; f_tag <= '0; f_bsrc <= B_WEIGHT;
    end else begin
      f_valid <= rd_en; f_first <= c_first; f_last <= c_last; f_tag <= c_tag; f_bsrc <= b_src;
    end
  end

  // ---------------- memories ----------------
  data_t a_data [S];
  data_t res_data [S];
  data_t w_data [DK];
  data_t t2_data [DK];
  logic [QA_W-1:0] res_addr;

  logic op_valid, op_busy, relu_clamp;
  dest_e op_dest;
  logic [CADDR_W-1:0] op_col;
  val_t op_val [S];
  data_t op_val8 [S];
  always_comb for (int i = 0; i < S; i++) op_val8[i] = data_t'(op_val[i]);

  logic smx_ovalid;
  logic [SA_W-1:0] smx_ocol;
  data_t smx_y [S];

  // Temp1 is written by the output path (Q W_Qi + b) or by the softmax (Y).
  logic t1_we;
  logic [TA_W-1:0] t1_addr;
  data_t t1_data [S];
  always_comb begin
    t1_we   = smx_ovalid || (op_valid && op_dest == D_T1);
    t1_addr = smx_ovalid ? TA_W'(smx_ocol) : TA_W'(op_col);
    t1_data = smx_ovalid ? smx_y : op_val8;
  end

  data_memory #(.S(S), .H(H)) u_dmem (
    .clk,
    .hw_en(hw_act_en), .hw_sel(hw_act_sel), .hw_addr(hw_act_addr), .hw_data(hw_act_data),
    .t1_we, .t1_addr, .t1_data,
    .p_we(op_valid && op_dest == D_P), .p_addr(PA_W'(op_col)), .p_data(op_val8),
    .rd_en, .rd_src(a_src), .rd_addr(PA_W'(a_addr)), .rd_data(a_data),
    .res_addr, .res_data
  );

  weight_memory #(.H(H)) u_wmem (
    .clk, .hw_en(hw_w_en), .hw_addr(hw_w_addr), .hw_data(hw_w_data),
    .rd_en(rd_en && b_src == B_WEIGHT), .rd_addr(WA_W'(w_addr)), .rd_data(w_data)
  );

  temp2_buffer #(.S(S)) u_t2 (
    .clk, .we(op_valid && op_dest == D_T2), .waddr(6'(op_col)), .wdata(op_val8),
    .rd_en(rd_en && b_src != B_WEIGHT), .rd_rows(b_src == B_T2_ROWS), .rd_addr(6'(a_addr)),
    .rd_data(t2_data)
  );

  logic [BADDR_W-1:0] bias_addr;
  acc_t bias_data;
  bias_memory #(.H(H)) u_bmem (
    .clk, .hw_en(hw_b_en), .hw_addr(hw_b_addr), .hw_data(hw_b_data),
    .rd_addr(bias_addr), .rd_data(bias_data)
  );

  // ---------------- systolic array ----------------
  data_t sa_b [DK];
  always_comb sa_b = (f_bsrc == B_WEIGHT) ? w_data : t2_data;

  logic sa_ovalid, sa_busy;
  logic [5:0] sa_ocol;
  acc_t sa_oacc [S];
  logic [TAG_W-1:0] sa_otag;

  systolic_array #(.S(S)) u_sa (
    .clk, .rst_n,
    .in_valid(f_valid), .in_first(f_first), .in_last(f_last),
    .in_a(a_data), .in_b(sa_b), .in_tag(f_tag),
    .out_valid(sa_ovalid), .out_col(sa_ocol), .out_acc(sa_oacc), .out_tag(sa_otag),
    .busy(sa_busy)
  );

  // ---------------- bias / ReLU / residual adders ----------------
  sa_output_path #(.S(S), .QA_W(QA_W)) u_op (
    .clk, .rst_n,
    .in_valid(sa_ovalid), .in_col(sa_ocol), .in_acc(sa_oacc), .in_tag(tag_t'(sa_otag)),
    .bias_addr, .bias_data, .res_addr, .res_data,
    .out_valid(op_valid), .out_dest(op_dest), .out_col(op_col), .out_val(op_val),
    .busy(op_busy), .relu_clamp
  );

  assign pipe_idle = !f_valid && !sa_busy && !op_busy;

  // ---------------- softmax ----------------
  logic [SA_W-1:0] mask_col;
  logic [S-1:0] mask_bits;
  mask_matrix #(.S(S)) u_mask (
    .clk, .rst_n, .we(hw_m_en), .waddr(hw_m_addr), .wdata(hw_m_data),
    .rd_col(mask_col), .rd_data(mask_bits)
  );

  softmax #(.S(S)) u_smx (
    .clk, .rst_n,
    .in_valid(op_valid && op_dest == D_SMX), .in_col(6'(op_col)), .in_d(op_val),
    .mask_col, .mask_bits,
    .out_valid(smx_ovalid), .out_col(smx_ocol), .out_y(smx_y), .busy(smx_busy)
  );

  // ---------------- LayerNorm ----------------
  logic ln_busy;
  layernorm #(.S(S), .H(H)) u_ln (
    .clk, .rst_n, .clear(ln_clear),
    .in_valid(op_valid && op_dest == D_LN), .in_col(QA_W'(op_col)), .in_g(op_val),
    .pw_en(hw_ln_en), .pw_addr(hw_ln_addr), .pw_gamma(hw_ln_gamma), .pw_beta(hw_ln_beta),
    .out_valid, .out_col, .out_data, .done(ln_done), .busy(ln_busy)
  );

  // The softmax and the output path never write Temp1 in the same cycle.
  a_t1: assert property (@(posedge clk) disable iff (!rst_n)
                         !(smx_ovalid && op_valid && op_dest == D_T1));
endmodule
