// data_memory: the activation buffers of the accelerator and the SA's A-operand multiplexer.
//
// Four buffers, each stored as words of s INT8 values that hold one column of
// the matrix (so one word is one k-slice of the SA's A operand):
//   Q or X   s x 64h   loaded by the host (Q for MHA, X for FFN)
//   K = V    s x 64h   loaded by the host (MHA only)
//   Temp1    s x max(s,64)  Q_i W_Qi + b, then the softmax output Y
//   P        s x 256h  the heads' outputs P_i (MHA) or ReLU(X W1 + b1) (FFN)
// The buffer names and sizes are the paper's; the column-word organisation, the
// one-cycle synchronous reads and the port set are this design's choices.
//
// Ports: one host write port for Q/X and K=V; one write port each for Temp1
// and P; one A-operand read port (rd_src selects the buffer, the word arrives
// one cycle after rd_en); one residual read port on Q/X (one-cycle latency).
module data_memory
  import tfa_pkg::*;
#(
  parameter int S  = 64,
  parameter int H  = 8,
  localparam int DM   = 64 * H,
  localparam int T1N  = (S > 64) ? S : 64,
  localparam int PN   = 256 * H,
  localparam int QA_W = $clog2(DM),
  localparam int TA_W = $clog2(T1N),
  localparam int PA_W = $clog2(PN)
) (
  input  logic            clk,
  input  logic            hw_en,
  input  logic            hw_sel,      // 0: Q/X, 1: K=V
  input  logic [QA_W-1:0] hw_addr,
  input  data_t           hw_data [S],
  input  logic            t1_we,
  input  logic [TA_W-1:0] t1_addr,
  input  data_t           t1_data [S],
  input  logic            p_we,
  input  logic [PA_W-1:0] p_addr,
  input  data_t           p_data [S],
  input  logic            rd_en,
  input  a_src_e          rd_src,
  input  logic [PA_W-1:0] rd_addr,
  output data_t           rd_data [S],
  input  logic [QA_W-1:0] res_addr,
  output data_t           res_data [S]
);
  typedef data_t word_t [S];
  word_t qx_mem [DM];
  word_t kv_mem [DM];
  word_t t1_mem [T1N];
  word_t p_mem  [PN];

  always_ff @(posedge clk) begin
    if (hw_en && !hw_sel) qx_mem[hw_addr] <= hw_data;
    if (hw_en &&  hw_sel) kv_mem[hw_addr] <= hw_data;
    if (t1_we) t1_mem[t1_addr] <= t1_data;
    if (p_we)  p_mem[p_addr]   <= p_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      case (rd_src)
        A_QX:    rd_data <= qx_mem[QA_W'(rd_addr)];
        A_KV:    rd_data <= kv_mem[QA_W'(rd_addr)];
        A_T1:    rd_data <= t1_mem[TA_W'(rd_addr)];
        default: rd_data <= p_mem[rd_addr];
      endcase
    end
    res_data <= qx_mem[res_addr];
  end
endmodule
