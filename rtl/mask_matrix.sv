// mask_matrix: the s x s attention mask M used by the scaled masked softmax.
//
// M(i,j) = 1 removes element j from the softmax of row i (its output is 0).
// The host writes one row of s bits at a time; the softmax reads one column
// M(0..s-1, j) per cycle, combinationally, since its s lanes all work on the
// same j. The matrix is the paper's; the row-write / column-read ports are
// this design's choice.
module mask_matrix #(
  parameter int S = 64,
  localparam int AW = (S > 1) ? $clog2(S) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [S-1:0]  wdata,
  input  logic [AW-1:0] rd_col,
  output logic [S-1:0]  rd_data
);
  logic [S-1:0] m [S];   // m[i][j] = M(i,j)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < S; i++) m[i] <= '0;
    end else if (we) begin
      m[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < S; i++) rd_data[i] = m[i][rd_col];
  end
endmodule
