// log2_lut: base-2 logarithm of an unsigned fixed-point number by table look-up.
//
// The input x (XW bits, XF of them fractional) is viewed as a floating-point
// number x = x_m * 2^x_e with mantissa 1 <= x_m < 2: x_e follows from the
// position of the leading one and the LAW bits that follow it address the
// table LUT(x_m) = round(2^15 * log2(x_m)), as in the source. The result is
// log2(x) = x_e + LUT(x_m) in signed Q.15. The table is filled at elaboration;
// mantissa bits below the LAW address bits are truncated (error below
// 2^-LAW/ln2 in log2). The table depth is this design's choice.
// Purely combinational. x = 0 returns the most negative code and zero_o = 1.
module log2_lut #(
  parameter int XW  = 33,
  parameter int XF  = 32,
  parameter int LAW = 12,
  parameter int OW  = 24
) (
  input  logic [XW-1:0]        x_i,
  output logic signed [OW-1:0] y_o,
  output logic                 zero_o
);
  localparam int LF = 15;
  typedef logic [LF-1:0] lut_t [2**LAW];

  function automatic lut_t gen();
    lut_t t;
    real xm;
    for (int i = 0; i < 2**LAW; i++) begin
      xm   = 1.0 + real'(i) / real'(2**LAW);
      t[i] = LF'($rtoi($ln(xm) / $ln(2.0) * real'(1 << LF) + 0.5));
    end
    return t;
  endfunction

  localparam lut_t LUT = gen();

  logic [$clog2(XW)-1:0]   lead;
  logic [XW+LAW-1:0]       xs;
  logic [LAW-1:0]          idx;

  always_comb begin
    lead = '0;
    for (int b = 0; b < XW; b++)
      if (x_i[b]) lead = ($clog2(XW))'(b);
  end

  // shift the leading one to the top, then take the LAW bits below it
  assign xs     = {x_i, {LAW{1'b0}}} << (($clog2(XW))'(XW - 1) - lead);
  assign idx    = xs[XW+LAW-2 -: LAW];
  assign zero_o = (x_i == '0);
  assign y_o    = zero_o ? {1'b1, {(OW-1){1'b0}}}
                         : ((OW'(signed'({1'b0, lead})) - OW'(XF)) <<< LF) + OW'({1'b0, LUT[idx]});
endmodule
