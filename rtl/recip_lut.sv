// recip_lut -- reciprocal of a positive fixed-point number by a small look-up
// table, as used for 1/G_uu in the SINR and LLR circuits and for the
// determinant in the 2x2 inverse.
//
// The input is normalised by its leading one; the LB bits below the leading
// one address a 2^LB-entry table holding 2^(LB+P+1)/(2^(LB+1)+2i+1), i.e. the
// reciprocal of the bin centre with P = 16 fraction bits. A barrel shift then
// re-applies the exponent. Relative error is below 2^-(LB+1). The table is
// computed at elaboration from that formula. Zero or a result above the output
// range saturates to the largest output code.
// Interface: x is unsigned with IFRAC fraction bits, y unsigned with OFRAC
// fraction bits. Purely combinational.
// The published design only states that small LUTs are used; normalisation,
// table size and rounding are this design's choices.
module recip_lut #(
  parameter int unsigned IW    = 16,
  parameter int unsigned IFRAC = 12,
  parameter int unsigned OW    = 16,
  parameter int unsigned OFRAC = 12,
  parameter int unsigned LB    = 6
) (
  input  logic [IW-1:0] x,
  output logic [OW-1:0] y
);
  localparam int unsigned P = 16;
  typedef logic [P:0] tab_t [2**LB];

  function automatic tab_t mk_tab();
    tab_t t;
    for (int i = 0; i < 2**LB; i++) begin
      longint num, den;
      den = (longint'(1) << (LB + 1)) + 2 * i + 1;
      num = (longint'(1) << (LB + P + 1)) + den / 2;
      t[i] = (P+1)'(num / den);
    end
    return t;
  endfunction

  localparam tab_t TAB = mk_tab();

  always_comb begin
    int p, sh;
    logic [IW-1:0] mant;
    logic [LB-1:0] idx;
    logic [63:0]   val;
    p = 0;
    for (int i = 0; i < int'(IW); i++) if (x[i]) p = i;
    mant = x << (IW - 1 - p);
    idx  = mant[IW-2 -: LB];
    sh   = int'(IFRAC) + int'(OFRAC) - int'(P) - p;
    if (sh >= 0) val = 64'(TAB[idx]) << sh;
    else         val = 64'(TAB[idx]) >> (-sh);
    if (x == '0 || val > 64'((longint'(1) << OW) - 1)) y = '1;
    else y = val[OW-1:0];
  end
endmodule
