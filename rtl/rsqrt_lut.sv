// rsqrt_lut: the LayerNorm's x^(-0.5) unit, built around a lookup table.
//
// x (unsigned, IN_FRAC fraction bits, x > 0) is normalised by its leading one:
// x = m * 2^e with m in [1,2). For odd e, m is doubled and e made even, so
// x^-0.5 = LUT(m) * 2^(-e/2). The table has 2 x 32 entries indexed by the
// parity of e and the five mantissa bits below the leading one; entry values
// are floor(2^15 / sqrt(m_mid)), m_mid the middle of the entry's interval,
// computed at elaboration by an integer square root. Result r is unsigned
// Q.16 in R_W bits (saturating). Combinational.
// The paper states that this unit "is implemented with a lookup table"; the
// table's size and the exponent handling are this design's choices.
module rsqrt_lut #(
  parameter int IN_W    = 48,
  parameter int IN_FRAC = 16,
  parameter int R_W     = 26
) (
  input  logic [IN_W-1:0] x,
  output logic [R_W-1:0]  r
);
  localparam int MB = 5;

  function automatic longint unsigned isqrt(input longint unsigned v);
    longint unsigned res, bitv;
    res = 0;
    bitv = 64'd1 << 62;
    while (bitv > v) bitv = bitv >> 2;
    while (bitv != 0) begin
      if (v >= res + bitv) begin
        v   = v - (res + bitv);
        res = (res >> 1) + bitv;
      end else begin
        res = res >> 1;
      end
      bitv = bitv >> 2;
    end
    return res;
  endfunction

  // lut[p*32 + k]: p = 1 for odd exponents (mantissa doubled).
  function automatic logic [15:0] lut_entry(input int idx);
    longint unsigned num, den;
    int p, k;
    p = idx / (1 << MB);
    k = idx % (1 << MB);
    // m_mid = (2^(MB+1) + 2k + 1) / 2^(MB+1), times 2 when p = 1;
    // entry = sqrt(2^30 / m_mid)
    num = (64'd1 << 30) << (MB + 1);
    den = 64'((1 << (MB + 1)) + 2 * k + 1) << p;
    return 16'(isqrt(num / den));
  endfunction

  logic [15:0] lut [2 << MB];
  always_comb begin
    for (int n = 0; n < (2 << MB); n++) lut[n] = lut_entry(n);
  end

  int w, e, eh;
  logic [IN_W-1:0] norm;
  logic [MB-1:0] k;
  logic p;
  logic [63:0] base, rr;

  always_comb begin
    w = 0;
    for (int b = 0; b < IN_W; b++)
      if (x[b]) w = b;
    norm = x << (IN_W - 1 - w);
    k    = norm[IN_W-2 -: MB];
    e    = w - IN_FRAC;
    p    = e[0];                      // parity of e (two's complement)
    eh   = (e - int'(p)) / 2;         // exact: e - p is even
    base = 64'(lut[{p, k}]) << 1;     // Q.16
    if (eh >= 0) rr = base >> eh;
    else         rr = base << (-eh);
    if (x == '0 || rr > 64'((64'd1 << R_W) - 1))
      r = '1;
    else
      r = R_W'(rr);
  end
endmodule
