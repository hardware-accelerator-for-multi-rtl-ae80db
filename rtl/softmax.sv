// softmax: the scaled masked softmax module, s row lanes working in parallel.
//
// Input is D = Q_i K_i^T, one column D(0..s-1, j) per cycle straight from the
// SA output path. Every lane i computes
//   Y(i,j) = exp(x_j - max - ln(sum_j exp(x_j - max))),  x_j = D(i,j) / 8,
// over the entries with M(i,j) = 0, and Y(i,j) = 0 where M(i,j) = 1. This is
// the log-sum-exp form, so there is no divider. The four stages of the paper:
//   1  receive:  x = D >> 3, store, running max (masked entries count as -inf)
//   2  sum:      s cycles, sum += exp(x - max) (masked entries add 0)
//   3  ln:       one cycle, L = ln(sum)
//   4  output:   s cycles, column j of Y = exp(x - max - L) leaves per cycle
// Each lane has one EXP unit used by stages 2 and 4 and one LN unit.
// Stage order, the >>3 scaling and the masking muxes follow the paper; the
// number formats are this design's: D is 16-bit with DFRAC fraction bits, x
// and the exponents are Q.8, the sum Q.15, and Y leaves as INT8 Q0.7
// (1.0 saturates to 127). A row with every entry masked gives Y = 0.
// Columns with index >= s (the zero-padded part of the SA) are ignored.
//
// Timing: after the s-th column has arrived, stage 2 takes s cycles, stage 3
// one, and Y leaves in the next s cycles; 'busy' is high from the first column
// received until the last Y column has left.
module softmax
  import tfa_pkg::*;
#(
  parameter int S     = 64,
  parameter int DFRAC = 4,
  localparam int AW   = (S > 1) ? $clog2(S) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [5:0]     in_col,
  input  val_t           in_d [S],
  output logic [AW-1:0]  mask_col,
  input  logic [S-1:0]   mask_bits,
  output logic           out_valid,
  output logic [AW-1:0]  out_col,
  output data_t          out_y [S],
  output logic           busy
);
  localparam int XW = 24;
  localparam int SW = 16 + AW + 1;

  typedef enum logic [1:0] {PH_RECV, PH_SUM, PH_LN, PH_OUT} phase_e;
  phase_e phase;

  val_t dbuf [S][S];                 // dbuf[i][j] = D(i,j)
  logic signed [XW-1:0] xmax [S];
  logic [S-1:0] any;                 // lane has an unmasked entry
  logic [SW-1:0] sum [S];
  logic signed [15:0] lnv [S];
  logic [AW:0] rcnt;
  logic [AW-1:0] jcnt;

  function automatic logic signed [XW-1:0] scale(input val_t d);
    return (XW'(d) <<< 8) >>> (DFRAC + 3);   // D / 8 in Q.8
  endfunction

  logic col_ok;
  assign col_ok   = in_valid && (int'(in_col) < S);
  assign mask_col = (phase == PH_RECV) ? AW'(in_col) : jcnt;

  // Per-lane EXP and LN units.
  logic signed [XW-1:0] ez [S];
  logic [15:0] ev [S];
  logic signed [15:0] lv [S];
  for (genvar i = 0; i < S; i++) begin : g_lane
    logic signed [XW-1:0] xj;
    always_comb begin
      xj = scale(dbuf[i][jcnt]);
      if (phase == PH_OUT)
        ez[i] = xj - xmax[i] - XW'(lnv[i]);
      else
        ez[i] = xj - xmax[i];
    end
    softmax_exp_unit #(.IN_W(XW), .FRAC(8)) u_exp (.z(ez[i]), .e(ev[i]));
    softmax_ln_unit  #(.IN_W(SW), .IN_FRAC(15)) u_ln (.x(sum[i]), .ln(lv[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_RECV; rcnt <= '0; jcnt <= '0; any <= '0;
      out_valid <= 1'b0; out_col <= '0;
      for (int i = 0; i < S; i++) begin
        xmax[i] <= '0; sum[i] <= '0; lnv[i] <= '0; out_y[i] <= '0;
        for (int j = 0; j < S; j++) dbuf[i][j] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      case (phase)
        PH_RECV: begin
          if (col_ok) begin
            for (int i = 0; i < S; i++) begin
              dbuf[i][AW'(in_col)] <= in_d[i];
              if (!mask_bits[i] && (!any[i] || scale(in_d[i]) > xmax[i])) begin
                xmax[i] <= scale(in_d[i]);
                any[i]  <= 1'b1;
              end
            end
            if (rcnt == (AW+1)'(S - 1)) begin
              phase <= PH_SUM;
              jcnt  <= '0;
              for (int i = 0; i < S; i++) sum[i] <= '0;
            end
            rcnt <= rcnt + 1'b1;
          end
        end
        PH_SUM: begin
          for (int i = 0; i < S; i++)
            if (!mask_bits[i]) sum[i] <= sum[i] + SW'(ev[i]);
          jcnt <= jcnt + 1'b1;
          if (jcnt == AW'(S - 1)) phase <= PH_LN;
        end
        PH_LN: begin
          for (int i = 0; i < S; i++) lnv[i] <= lv[i];
          jcnt  <= '0;
          phase <= PH_OUT;
        end
        default: begin   // PH_OUT
          out_valid <= 1'b1;
          out_col   <= jcnt;
          for (int i = 0; i < S; i++) begin
            logic [16:0] r;
            r = (17'(ev[i]) + 17'd128) >> 8;
            if (mask_bits[i] || !any[i])
              out_y[i] <= '0;
            else
              out_y[i] <= (r > 17'd127) ? 8'sd127 : data_t'(r);
          end
          jcnt <= jcnt + 1'b1;
          if (jcnt == AW'(S - 1)) begin
            phase <= PH_RECV;
            rcnt  <= '0;
            any   <= '0;
          end
        end
      endcase
    end
  end

  assign busy = (phase != PH_RECV) || (rcnt != '0);
endmodule
