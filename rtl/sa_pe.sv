// sa_pe: one processing element of the s x 64 systolic array.
//
// An INT8 x INT8 multiply-accumulate cell of an output-stationary array. The A
// operand and the framing flags (valid, first, last) arrive from the left and
// are passed right one cycle later; the B operand arrives from the top and is
// passed down one cycle later. On 'first' the accumulator restarts with the
// product; on 'last' the finished sum is copied into 'res', where it stays
// until the same PE finishes its next GEMM, so the next GEMM can start while
// the array's owner reads 'res'. The PE itself is named in the paper; its
// dataflow is this design's choice.
module sa_pe
  import tfa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  data_t a_in,
  input  logic  v_in,
  input  logic  f_in,
  input  logic  l_in,
  input  data_t b_in,
  output data_t a_out,
  output logic  v_out,
  output logic  f_out,
  output logic  l_out,
  output data_t b_out,
  output acc_t  res
);
  acc_t acc;
  acc_t sum;

  always_comb begin
    sum = (f_in ? '0 : acc) + acc_t'(a_in * b_in);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; b_out <= '0;
      v_out <= 1'b0; f_out <= 1'b0; l_out <= 1'b0;
      acc   <= '0; res <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      v_out <= v_in;
      f_out <= f_in;
      l_out <= l_in;
      if (v_in) begin
        acc <= sum;
        if (l_in) res <= sum;
      end
    end
  end
endmodule
