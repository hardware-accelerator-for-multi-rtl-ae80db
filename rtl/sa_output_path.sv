// sa_output_path: the two banks of s adders after the SA, with requantisation and ReLU.
//
// Each SA result column c (s accumulator values) gets the bias of that column
// added (one value broadcast to all rows), is rescaled by a round-half-up
// arithmetic right shift and saturated: to INT8 for the activation buffers,
// to 16 bits for the softmax input. For FFN sublayer 1 the INT8 value passes
// through ReLU. For the last GEMMs of a ResBlock (W_G or W_2) the residual
// column of Q or X is added, giving the 16-bit G value for LayerNorm.
// The bias adders, ReLU and residual adders follow the paper's block diagram;
// number formats, rounding and saturation are this design's choices.
//
// Timing: the bias and residual memories are read in the cycle the column
// arrives (bias_addr, res_addr) and answer one cycle later; results leave two
// cycles after the column arrived, one column per cycle, fully pipelined.
module sa_output_path
  import tfa_pkg::*;
#(
  parameter int S    = 64,
  parameter int QA_W = 9     // Q/X buffer column address width
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [5:0]         in_col,
  input  acc_t               in_acc [S],
  input  tag_t               in_tag,
  output logic [BADDR_W-1:0] bias_addr,
  input  acc_t               bias_data,
  output logic [QA_W-1:0]    res_addr,
  input  data_t              res_data [S],
  output logic               out_valid,
  output dest_e              out_dest,
  output logic [CADDR_W-1:0] out_col,
  output val_t               out_val [S],
  output logic               busy,
  output logic               relu_clamp   // a ReLU set at least one value of this column to 0
);
  assign bias_addr = in_tag.bias_base + BADDR_W'(in_col);
  assign res_addr  = QA_W'(in_tag.col_base + CADDR_W'(in_col));

  // Stage 1 registers: column and tag, waiting for the bias / residual read.
  logic s1_valid;
  tag_t s1_tag;
  logic [5:0] s1_col;
  acc_t s1_acc [S];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_tag <= '0; s1_col <= '0;
      for (int i = 0; i < S; i++) s1_acc[i] <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_tag   <= in_tag;
      s1_col   <= in_col;
      for (int i = 0; i < S; i++) s1_acc[i] <= in_acc[i];
    end
  end

  // Stage 2: bias, shift, saturate, ReLU, residual.
  val_t nxt [S];
  logic [S-1:0] clamp;
  always_comb begin
    for (int i = 0; i < S; i++) begin
      logic signed [63:0] x, r, q8;
      x = 64'(s1_acc[i]) + (s1_tag.use_bias ? 64'(bias_data) : 64'sd0);
      if (s1_tag.shift != '0)
        r = (x + (64'sd1 <<< (s1_tag.shift - 1))) >>> s1_tag.shift;
      else
        r = x;
      q8 = sat(r, DATA_W);
      clamp[i] = 1'b0;
      case (s1_tag.dest)
        D_SMX:   nxt[i] = val_t'(sat(r, VAL_W));
        D_LN:    nxt[i] = val_t'(q8) + val_t'(res_data[i]);
        default: begin
          if (s1_tag.relu && q8 < 0) begin
            nxt[i] = '0;
            clamp[i] = 1'b1;
          end else begin
            nxt[i] = val_t'(q8);
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_dest <= D_T1; out_col <= '0; relu_clamp <= 1'b0;
      for (int i = 0; i < S; i++) out_val[i] <= '0;
    end else begin
      out_valid  <= s1_valid;
      out_dest   <= s1_tag.dest;
      out_col    <= (s1_tag.dest == D_SMX) ? CADDR_W'(s1_col) : s1_tag.col_base + CADDR_W'(s1_col);
      relu_clamp <= s1_valid & (|clamp);
      for (int i = 0; i < S; i++) out_val[i] <= nxt[i];
    end
  end

  assign busy = in_valid | s1_valid | out_valid;
endmodule
