// tfa_pkg: types and constants shared by the Transformer ResBlock accelerator.
//
// The accelerator computes one multi-head-attention (MHA) or one position-wise
// feed-forward (FFN) ResBlock with a single s x 64 systolic array. Operands are
// INT8, products accumulate in 32 bits. The step descriptor (step_t) tells the
// datapath where a GEMM reads its operands, and the tag (tag_t) travels with the
// GEMM through the array so the output path knows where its columns go.
// The field widths are sized for h <= 16 and s <= 64 (the paper's largest
// model has h = 16; its evaluated sequence length is 64).
package tfa_pkg;

  localparam int DATA_W  = 8;    // INT8 operands
  localparam int ACC_W   = 32;   // accumulator width
  localparam int VAL_W   = 16;   // width of a value after the output adders
  localparam int DK      = 64;   // SA columns = d_k
  localparam int SHIFT_W = 5;    // requantisation shift
  localparam int KLEN_W  = 13;   // GEMM depth K up to 4096
  localparam int WADDR_W = 20;   // weight memory address
  localparam int BADDR_W = 13;   // bias memory address
  localparam int CADDR_W = 13;   // column address inside an activation buffer

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [VAL_W-1:0]  val_t;

  typedef enum logic {MODE_MHA = 1'b0, MODE_FFN = 1'b1} mode_e;

  // Source of the SA's A operand (left edge).
  typedef enum logic [1:0] {A_QX = 2'd0, A_KV = 2'd1, A_T1 = 2'd2, A_P = 2'd3} a_src_e;

  // Source of the SA's B operand (top edge).
  typedef enum logic [1:0] {
    B_WEIGHT  = 2'd0,   // weight memory row
    B_T2_COLS = 2'd1,   // Temp2 column word k  (K_i^T, row k)
    B_T2_ROWS = 2'd2    // Temp2 row k          (V_i, row k)
  } b_src_e;

  // Destination of a GEMM's result columns.
  typedef enum logic [2:0] {
    D_T1 = 3'd0, D_T2 = 3'd1, D_SMX = 3'd2, D_P = 3'd3, D_LN = 3'd4
  } dest_e;

  // Requantisation shifts, one per kind of GEMM (host configuration).
  typedef struct packed {
    logic [SHIFT_W-1:0] q;    // Q W_Qi + b   -> Temp1
    logic [SHIFT_W-1:0] k;    // K W_Ki + b   -> Temp2
    logic [SHIFT_W-1:0] v;    // V W_Vi + b   -> Temp2
    logic [SHIFT_W-1:0] qk;   // Temp1 Temp2^T -> softmax
    logic [SHIFT_W-1:0] pv;   // Y V_i        -> P
    logic [SHIFT_W-1:0] g;    // P W_Gi + b   -> residual, LayerNorm
    logic [SHIFT_W-1:0] f1;   // X W1_i + b1  -> ReLU -> P
    logic [SHIFT_W-1:0] f2;   // P W2_i + b2  -> residual, LayerNorm
  } quant_cfg_t;

  // Side information of one GEMM, carried with it through the SA.
  typedef struct packed {
    dest_e               dest;
    logic                use_bias;
    logic [BADDR_W-1:0]  bias_base;   // bias of column c at bias_base + c
    logic [CADDR_W-1:0]  col_base;    // column c goes to col_base + c
    logic                relu;
    logic [SHIFT_W-1:0]  shift;
  } tag_t;

  localparam int TAG_W = $bits(tag_t);

  // Saturate a wide signed value to 'w' bits (w <= 32), returned sign-extended.
  function automatic logic signed [63:0] sat(input logic signed [63:0] x, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (x > hi)      return hi;
    else if (x < lo) return lo;
    else             return x;
  endfunction

endpackage
