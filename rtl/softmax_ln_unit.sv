// softmax_ln_unit: ln(x) with a leading-one detector, shifts and adds.
//
// For x = 2^w * (1 + k), k in [0,1), log2(x) ~ w + k (straight-line mantissa),
// then ln(x) = ln(2) * log2(x) with ln 2 ~ 1/2 + 1/8 + 1/16 + 1/256.
// x is unsigned fixed point with IN_FRAC fraction bits (the softmax row sum,
// Q.15); the result is signed Q.8. ln(0) is returned as 0. Combinational.
// As with the EXP unit the paper defers the insides to its reference design;
// this is this design's reading of "linear approximation is used in ... the
// logarithmic function".
module softmax_ln_unit #(
  parameter int IN_W    = 22,
  parameter int IN_FRAC = 15
) (
  input  logic [IN_W-1:0]    x,
  output logic signed [15:0] ln
);
  int w;
  logic [IN_W-1:0] norm;
  logic [7:0] k;
  logic signed [19:0] l2;

  always_comb begin
    w = 0;
    for (int b = 0; b < IN_W; b++)
      if (x[b]) w = b;
    norm = x << (IN_W - 1 - w);              // leading one at the top
    if (IN_W > 8)
      k = norm[IN_W-2 -: 8];
    else
      k = '0;
    l2 = (20'(w - IN_FRAC) <<< 8) + 20'(k);  // log2 in Q.8
    if (x == '0)
      ln = '0;
    else
      ln = 16'((l2 >>> 1) + (l2 >>> 3) + (l2 >>> 4) + (l2 >>> 8));
  end
endmodule
