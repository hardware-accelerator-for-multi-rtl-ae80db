// softmax_exp_unit: exp(z) for z <= 0 with shifts and adds only.
//
// exp(z) = 2^(z log2 e). The product z*log2(e) is formed as z + z/2 - z/16
// (log2 e ~ 1.4375), split into an integer part u <= 0 and a fraction v in
// [0,1), and 2^v is replaced by the straight line 1 + v, so
// exp(z) ~ (1 + v) * 2^u: a shift of (1 + v) by -u places.
// z is signed fixed point with FRAC fraction bits; the result is unsigned
// Q0.15 (1.0 = 32768), zero once the shift reaches 16. Combinational.
// The paper uses the EXP unit of its reference softmax design without
// describing it; this is this design's reading of "linear approximation is
// used in the exponential function", with no multiplier and no table.
module softmax_exp_unit #(
  parameter int IN_W = 24,
  parameter int FRAC = 8
) (
  input  logic signed [IN_W-1:0] z,
  output logic [15:0]            e
);
  logic signed [IN_W+1:0] t;
  logic signed [IN_W+1:0] u;
  logic [FRAC-1:0] v;
  logic [IN_W+1:0] nsh;
  logic [31:0] mant;

  always_comb begin
    t    = (IN_W+2)'(z) + ((IN_W+2)'(z) >>> 1) - ((IN_W+2)'(z) >>> 4);
    u    = t >>> FRAC;                       // floor
    v    = t[FRAC-1:0];                      // fraction
    nsh  = (IN_W+2)'(-u);
    mant = ((32'(1) << FRAC) + 32'(v)) << (15 - FRAC);   // (1+v) in Q0.15
    if (z > 0)
      e = 16'hFFFF;                          // outside the unit's range
    else if (nsh >= (IN_W+2)'(16))
      e = '0;
    else
      e = 16'(mant >> nsh);
  end
endmodule
