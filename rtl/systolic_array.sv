// systolic_array: the s x 64 SA Module, computing C = A x B one column at a time.
//
// A is s x K and streams in one column (k-slice) per cycle on in_a; B is K x 64
// and streams in one row per cycle on in_b. Row i of A is delayed i cycles and
// column j of B j cycles on entry, so PE(i,j) sees A(i,k) and B(k,j) together
// at cycle k+i+j (output-stationary dataflow). The paper specifies only that
// the array has s rows and 64 columns and returns the product column by column;
// the skewing, the result register in each PE and the read-out are this
// design's choices.
//
// Read-out: PE(s-1,c) is the last PE of column c to finish, and the framing
// flags it passes on mark the cycle in which the whole of column c is final.
// That one-hot column select drives a column multiplexer per row, so columns
// leave in the order 0, 1, ..., 63, one per cycle, registered, together with
// the GEMM's tag. A GEMM of depth K leaves its first column K+s+1 cycles after
// its first slice entered, and its last 63 cycles later.
//
// Rules for the caller (checked by assertions): a new GEMM may follow directly
// when its depth K >= 64 and K >= s; a shorter GEMM must start 64-K cycles
// late so that two GEMMs never read out in the same cycle.
module systolic_array
  import tfa_pkg::*;
#(
  parameter int S     = 64,
  parameter int COLS  = DK,
  parameter int TAGW  = TAG_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  data_t             in_a [S],
  input  data_t             in_b [COLS],
  input  logic [TAGW-1:0]   in_tag,
  output logic              out_valid,
  output logic [$clog2(COLS)-1:0] out_col,
  output acc_t              out_acc [S],
  output logic [TAGW-1:0]   out_tag,
  output logic              busy
);
  // Interconnect between PEs: horizontal (a, flags) and vertical (b).
  data_t a_h [S][COLS+1];
  logic  v_h [S][COLS+1];
  logic  f_h [S][COLS+1];
  logic  l_h [S][COLS+1];
  data_t b_v [S+1][COLS];
  acc_t  res [S][COLS];

  // Input skew: row i delayed by i cycles, column j by j cycles.
  for (genvar i = 0; i < S; i++) begin : g_askew
    if (i == 0) begin : g_d0
      assign a_h[0][0] = in_a[0];
      assign v_h[0][0] = in_valid;
      assign f_h[0][0] = in_first;
      assign l_h[0][0] = in_last;
    end else begin : g_dn
      data_t dl_a [i];
      logic  dl_v [i], dl_f [i], dl_l [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < i; d++) begin
            dl_a[d] <= '0; dl_v[d] <= 1'b0; dl_f[d] <= 1'b0; dl_l[d] <= 1'b0;
          end
        end else begin
          dl_a[0] <= in_a[i]; dl_v[0] <= in_valid; dl_f[0] <= in_first; dl_l[0] <= in_last;
          for (int d = 1; d < i; d++) begin
            dl_a[d] <= dl_a[d-1]; dl_v[d] <= dl_v[d-1];
            dl_f[d] <= dl_f[d-1]; dl_l[d] <= dl_l[d-1];
          end
        end
      end
      assign a_h[i][0] = dl_a[i-1];
      assign v_h[i][0] = dl_v[i-1];
      assign f_h[i][0] = dl_f[i-1];
      assign l_h[i][0] = dl_l[i-1];
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_bskew
    if (j == 0) begin : g_d0
      assign b_v[0][0] = in_b[0];
    end else begin : g_dn
      data_t dl_b [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < j; d++) dl_b[d] <= '0;
        end else begin
          dl_b[0] <= in_b[j];
          for (int d = 1; d < j; d++) dl_b[d] <= dl_b[d-1];
        end
      end
      assign b_v[0][j] = dl_b[j-1];
    end
  end

  // The PE grid.
  for (genvar i = 0; i < S; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      sa_pe u_pe (
        .clk, .rst_n,
        .a_in (a_h[i][j]), .v_in (v_h[i][j]), .f_in (f_h[i][j]), .l_in (l_h[i][j]),
        .b_in (b_v[i][j]),
        .a_out(a_h[i][j+1]), .v_out(v_h[i][j+1]), .f_out(f_h[i][j+1]), .l_out(l_h[i][j+1]),
        .b_out(b_v[i+1][j]),
        .res  (res[i][j])
      );
    end
  end

  // Column c is complete when the bottom row passes on the 'last' flag of column c.
  logic [COLS-1:0] col_done;
  for (genvar j = 0; j < COLS; j++) begin : g_done
    assign col_done[j] = v_h[S-1][j+1] & l_h[S-1][j+1];
  end

  // Tag FIFO: pushed with the first slice of a GEMM, popped after its last column.
  localparam int TQ = 4;
  logic [TAGW-1:0] tq [TQ];
  logic [1:0] tq_wp, tq_rp;
  logic [2:0] tq_cnt;
  logic push, pop;
  assign push = in_valid & in_first;
  assign pop  = col_done[COLS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tq_wp <= '0; tq_rp <= '0; tq_cnt <= '0;
      for (int q = 0; q < TQ; q++) tq[q] <= '0;
    end else begin
      if (push) begin
        tq[tq_wp] <= in_tag;
        tq_wp <= tq_wp + 2'd1;
      end
      if (pop) tq_rp <= tq_rp + 2'd1;
      tq_cnt <= tq_cnt + 3'(push) - 3'(pop);
    end
  end

  // Column multiplexer, one per row.
  acc_t col_sel [S];
  for (genvar i = 0; i < S; i++) begin : g_mux
    always_comb begin
      col_sel[i] = '0;
      for (int j = 0; j < COLS; j++)
        if (col_done[j]) col_sel[i] = col_sel[i] | res[i][j];
    end
  end

  // Registered read-out of the completed column.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_col   <= '0;
      out_tag   <= '0;
      for (int i = 0; i < S; i++) out_acc[i] <= '0;
    end else begin
      out_valid <= |col_done;
      out_tag   <= tq[tq_rp];
      for (int j = 0; j < COLS; j++)
        if (col_done[j]) out_col <= ($clog2(COLS))'(j);
      for (int i = 0; i < S; i++) out_acc[i] <= col_sel[i];
    end
  end

  assign busy = (tq_cnt != 3'd0);

  // At most one column completes per cycle, and the tag FIFO never overflows.
  a_onecol: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(col_done));
  a_tq:     assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && tq_cnt == 3'(TQ)));
endmodule
