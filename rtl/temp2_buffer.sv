// temp2_buffer: the s x 64 Temp2 buffer, feeding the SA's B operand in two orientations.
//
// Temp2 holds K_i W_Ki + b and later V W_Vi + b, written one result column
// (s values) per cycle. For Q_i K_i^T the SA needs B = K_i^T, whose row k is
// column word k (padded with zeros to 64 when s < 64, the zero padding the
// paper describes). For Y V_i it needs B = V_i, whose row k is element k of
// every column word. Storage is a register array so both orientations can be
// read in one cycle; the read is registered (one-cycle latency) to match the
// weight memory. The buffer is the paper's; the two read modes are this
// design's way of serving both GEMMs from it.
module temp2_buffer
  import tfa_pkg::*;
#(
  parameter int S    = 64,
  parameter int COLS = DK
) (
  input  logic        clk,
  input  logic        we,
  input  logic [5:0]  waddr,
  input  data_t       wdata [S],
  input  logic        rd_en,
  input  logic        rd_rows,   // 0: column word k, 1: row k
  input  logic [5:0]  rd_addr,
  output data_t       rd_data [COLS]
);
  data_t mem [COLS][S];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < S; i++) mem[waddr][i] <= wdata[i];
    end
    if (rd_en) begin
      for (int j = 0; j < COLS; j++) begin
        if (rd_rows)
          rd_data[j] <= (int'(rd_addr) < S) ? mem[j][rd_addr] : '0;
        else
          rd_data[j] <= (j < S) ? mem[rd_addr][j] : '0;
      end
    end
  end
endmodule
