// ratio_calc: divider-free ratio numer/denom, shared by the Hjorth mobility,
// Hjorth complexity and HFO-ratio features.
//
// A leading-zero detector finds lz, the denominator is shifted left by lz so
// that its MSB is one, and its top R+1 bits m (2^R <= m < 2^(R+1)) address a
// reciprocal LUT holding round(2^(2R+1) / m). The numerator is multiplied by
// that reciprocal and the product is shifted by lz again, giving
//     ratio = numer * recip * 2^(lz + Q - DW - R)   ~=  numer / denom * 2^Q
// with Q fractional bits, saturated to OUT_W bits. The relative error is
// that of the truncated m, below 2^-R. denom = 0 gives the saturated value.
// Purely combinational. The LUT contents follow from the formula above and
// are computed at elaboration.
// From the paper: leading-zero detector, shift, reciprocal LUT, multiplier,
// output shift (Fig. 10(a)). This design's own: R, Q, widths, rounding.
module ratio_calc #(
  parameter int unsigned NW    = 32,
  parameter int unsigned DW    = 32,
  parameter int unsigned R     = 6,
  parameter int unsigned Q     = 8,
  parameter int unsigned OUT_W = 16
) (
  input  logic [NW-1:0]    numer,
  input  logic [DW-1:0]    denom,
  output logic [OUT_W-1:0] ratio
);
  localparam int unsigned RW = R + 2;
  localparam int unsigned PW = NW + RW + DW;

  function automatic logic [RW-1:0] recip_entry(input int unsigned i);
    longint unsigned m;
    m = (longint'(1) << R) + longint'(i);
    return RW'(((longint'(1) << (2 * R + 1)) + m / 2) / m);
  endfunction

  logic [RW-1:0] lut [1 << R];
  always_comb
    for (int unsigned i = 0; i < (1 << R); i++) lut[i] = recip_entry(i);

  logic [$clog2(DW+1)-1:0] lz;
  logic [DW-1:0]           dn;
  logic [RW-1:0]           recip;
  logic [PW-1:0]           prod;

  always_comb begin
    lz = '0;
    for (int i = 0; i < int'(DW); i++)
      if (denom[i]) lz = ($clog2(DW+1))'(int'(DW) - 1 - i);
    dn    = denom << lz;
    recip = lut[dn[DW-2 -: R]];
    prod  = (PW'(numer) * PW'(recip)) << lz;
    prod  = prod >> (DW + R - Q);
    if (denom == '0 || prod >= PW'({OUT_W{1'b1}})) ratio = '1;
    else ratio = OUT_W'(prod);
  end
endmodule
