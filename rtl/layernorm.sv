// layernorm: the LayerNorm module, normalising each row of G (s x 64h).
//
//   Output(i,t) = (G(i,t) - E_i) * r_i * gamma_t + beta_t,
//   E_i = mean of row i,  r_i = (E(G^2)_i - E_i^2 + eps)^-0.5
//
// G arrives one column (s values) per cycle from the residual adders. While it
// arrives, each of the s lanes accumulates sum G and sum G^2 and the column is
// stored in the G buffer, so that no pass over G is needed after the last
// column: the paper's two latency optimisations (accumulators on the module's
// input, and the variance as E(G^2) - E^2). Two cycles after the last column
// the r_i are ready (x^-0.5 by rsqrt_lut), and the output columns t = 0 .. 64h-1
// leave one per cycle, the first five cycles after the last G column was
// presented (G may arrive with gaps).
// Each output lane multiplies r_i by gamma_t, then by (G - E_i), and adds
// beta_t, as in the paper's block diagram.
//
// The paper prints the variance as E^2 - E(G^2) (Eq. 9, Fig. 8); that has the
// wrong sign and the definition of Eq. 8, E(G^2) - E^2, is used. Number formats
// are this design's: G is 16-bit integer, E is Q.8, the variance Q.16,
// eps = 1 LSB of it (the paper's 1e-8 is smaller than that LSB), r is Q.16,
// gamma and beta are INT8 with GAMMA_FRAC / BETA_FRAC fraction bits, and the
// output is INT8 with OUT_FRAC fraction bits, rounded and saturated. Division
// by d_model is a multiplication by 2^20 / d_model (exact for d_model = 2^n).
//
// 'clear' starts a new ResBlock. gamma/beta are loaded through pw_*.
module layernorm
  import tfa_pkg::*;
#(
  parameter int S          = 64,
  parameter int H          = 8,
  parameter int OUT_FRAC   = 4,
  parameter int GAMMA_FRAC = 6,
  parameter int BETA_FRAC  = 4,
  localparam int DM = 64 * H,
  localparam int CW = $clog2(DM)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  logic [CW-1:0]  in_col,
  input  val_t           in_g [S],
  input  logic           pw_en,
  input  logic [CW-1:0]  pw_addr,
  input  data_t          pw_gamma,
  input  data_t          pw_beta,
  output logic           out_valid,
  output logic [CW-1:0]  out_col,
  output data_t          out_data [S],
  output logic           done,
  output logic           busy
);
  localparam int RS = 20;
  localparam longint RECIP = (64'd1 << RS) / 64'(DM);
  localparam int R_W = 26;

  typedef enum logic [2:0] {L_RECV, L_STAT1, L_STAT2, L_OUT, L_DONE} lphase_e;
  lphase_e phase;

  val_t  gbuf [DM][S];
  data_t gamma [DM];
  data_t beta  [DM];

  logic signed [63:0] s1 [S];      // sum G
  logic signed [63:0] s2 [S];      // sum G^2
  logic signed [63:0] efx [S];     // E, Q.8
  logic signed [63:0] eg2 [S];     // E(G^2), Q.16
  logic [R_W-1:0] r [S];
  logic [CW:0] rcnt;
  logic [CW:0] t;                  // output read address
  logic rd_v;                      // read stage valid
  logic [CW-1:0] rd_col;
  val_t  g_rd [S];
  data_t gm_rd, bt_rd;

  // x^-0.5 of (var + eps), one unit per lane.
  logic [47:0] varx [S];
  logic [R_W-1:0] rv [S];
  for (genvar i = 0; i < S; i++) begin : g_rs
    always_comb begin
      logic signed [63:0] v;
      v = eg2[i] - efx[i] * efx[i];
      if (v < 0) v = 0;
      varx[i] = 48'(v) + 48'd1;      // + eps
    end
    rsqrt_lut #(.IN_W(48), .IN_FRAC(16), .R_W(R_W)) u_rs (.x(varx[i]), .r(rv[i]));
  end

  always_ff @(posedge clk) begin
    if (pw_en) begin
      gamma[pw_addr] <= pw_gamma;
      beta[pw_addr]  <= pw_beta;
    end
    if (in_valid && phase == L_RECV) gbuf[in_col] <= in_g;
    g_rd  <= gbuf[CW'(t)];
    gm_rd <= gamma[CW'(t)];
    bt_rd <= beta[CW'(t)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= L_RECV; rcnt <= '0; t <= '0; rd_v <= 1'b0; rd_col <= '0;
      out_valid <= 1'b0; out_col <= '0; done <= 1'b0;
      for (int i = 0; i < S; i++) begin
        s1[i] <= '0; s2[i] <= '0; efx[i] <= '0; eg2[i] <= '0; r[i] <= '0; out_data[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      if (clear) begin
        phase <= L_RECV; rcnt <= '0;
        for (int i = 0; i < S; i++) begin s1[i] <= '0; s2[i] <= '0; end
      end else begin
        case (phase)
          L_RECV: if (in_valid) begin
            for (int i = 0; i < S; i++) begin
              s1[i] <= s1[i] + 64'(in_g[i]);
              s2[i] <= s2[i] + 64'(in_g[i]) * 64'(in_g[i]);
            end
            rcnt <= rcnt + 1'b1;
            if (rcnt == (CW+1)'(DM - 1)) phase <= L_STAT1;
          end
          L_STAT1: begin
            for (int i = 0; i < S; i++) begin
              efx[i] <= (s1[i] * RECIP) >>> (RS - 8);
              eg2[i] <= (s2[i] * RECIP) >>> (RS - 16);
            end
            phase <= L_STAT2;
          end
          L_STAT2: begin
            for (int i = 0; i < S; i++) r[i] <= rv[i];
            t <= '0;
            phase <= L_OUT;
          end
          L_OUT: begin
            rd_v   <= 1'b1;
            rd_col <= CW'(t);
            t      <= t + 1'b1;
            if (t == (CW+1)'(DM - 1)) phase <= L_DONE;
          end
          default: ;   // L_DONE: wait for 'clear'
        endcase
      end

      // Output stage.
      out_valid <= rd_v;
      out_col   <= rd_col;
      if (rd_v) begin
        for (int i = 0; i < S; i++) begin
          logic signed [63:0] diff, a, p;
          diff = (64'(g_rd[i]) <<< 8) - efx[i];                    // Q.8
          a    = $signed({38'd0, r[i]}) * 64'(gm_rd);              // Q.(16+GAMMA_FRAC)
          p    = diff * a;                                         // Q.(24+GAMMA_FRAC)
          p    = p + (64'(bt_rd) <<< (24 + GAMMA_FRAC - BETA_FRAC));
          p    = (p + (64'sd1 <<< (24 + GAMMA_FRAC - OUT_FRAC - 1))) >>> (24 + GAMMA_FRAC - OUT_FRAC);
          out_data[i] <= data_t'(sat(p, DATA_W));
        end
        if (rd_col == CW'(DM - 1)) done <= 1'b1;
      end
    end
  end

  assign busy = (phase != L_RECV && phase != L_DONE) || rd_v || out_valid;
endmodule
