// recip_nr: reciprocal y = 1/a of an unsigned fixed-point number by a lookup
// table seed and one Newton-Raphson iteration.
//
// a (IW bits, IF fraction bits) is normalised to a mantissa m in [1,2) with
// MF fraction bits by a leading-one search.  The LB bits after the leading
// one address a table holding 1/m at the midpoint of each interval
// (g0 = round(2^MF / (1 + (i+0.5)/2^LB))); one Newton-Raphson step
// g1 = g0 (2 - m g0) squares the seed's relative error (about 2^-(LB+2)).
// The result g1 * 2^(IF-p), p the leading-one position, is written with OF
// fraction bits into OW bits, saturating; a = 0 gives all ones.
// Purely combinational.  The published design states a single-iteration
// LUT-based Newton-Raphson step; table size, precision and formats are this
// design's.
module recip_nr #(
  parameter int IW = 56,
  parameter int IF = 24,
  parameter int OW = 56,
  parameter int OF = 24,
  parameter int MF = 16,
  parameter int LB = 6
) (
  input  logic [IW-1:0] a,
  output logic [OW-1:0] y
);

  localparam int EW = MF + 3 + IF + OF;   // room for the largest left shift

  function automatic logic [MF:0] seed(input int i);
    longint num, den;
    den = (longint'(1) << (LB + 1)) + 2 * i + 1;
    num = longint'(1) << (MF + LB + 2);
    return (MF+1)'((num + den) / (2 * den));
  endfunction

  logic [MF:0] lut [2**LB];
  for (genvar i = 0; i < 2**LB; i++) begin : g_lut
    assign lut[i] = seed(i);
  end

  logic [$clog2(IW+1)-1:0] p;
  logic [IW-1:0]           an;
  logic [IW+MF:0]          anx;
  logic [MF:0]             m, g0;
  logic [2*MF+1:0]         t;
  logic [2*MF+2:0]         e;
  logic [3*MF+3:0]         g1w;
  logic [MF+1:0]           g1;
  logic [EW-1:0]           r;
  int                      sh;

  always_comb begin
    p = '0;
    for (int i = 0; i < IW; i++) if (a[i]) p = ($clog2(IW+1))'(i);
    an  = a << (IW - 1 - int'(p));
    anx = {an, (MF+1)'(0)};
    m   = anx[IW+MF -: MF+1];
    g0  = lut[m[MF-1 -: LB]];
    t   = m * g0;                                   // Q2.2MF
    e   = ((2*MF+3)'(1) << (2 * MF + 1)) - (2*MF+3)'(t);  // 2 - m g0
    g1w = g0 * e;
    g1  = (MF+2)'(g1w >> (2 * MF));
    sh  = IF + OF - MF - int'(p);
    if (sh >= 0) r = EW'(g1) << sh;
    else         r = EW'(g1) >> (-sh);
    if (a == '0 || (r >> OW) != '0) y = '1;
    else                            y = OW'(r);
  end

endmodule
