// log10_unit: LOG block of the threshold unit, log10 of a fixed-point number.
//
// Uses log10(x) = (x_e + log2(x_m)) / log2(10): the base-2 logarithm comes
// from the look-up table of log2_lut and is multiplied by the constant
// round(2^16 / log2(10)) = 19728, which replaces the division by log2(10).
// Input: unsigned x with XW bits, XF fractional. Output: signed Q.15.
// Purely combinational; zero_o flags x = 0 (log undefined).
module log10_unit #(
  parameter int XW  = 33,
  parameter int XF  = 32,
  parameter int LAW = 12,
  parameter int OW  = 24
) (
  input  logic [XW-1:0]        x_i,
  output logic signed [OW-1:0] y_o,
  output logic                 zero_o
);
  localparam logic signed [17:0] INV_LOG2_10 = 18'sd19728;  // 2^16 / log2(10)

  logic signed [OW-1:0]    l2;
  logic signed [OW+17:0]   prod;

  log2_lut #(.XW(XW), .XF(XF), .LAW(LAW), .OW(OW)) u_log2 (
    .x_i(x_i), .y_o(l2), .zero_o(zero_o)
  );

  assign prod = (OW+18)'(l2) * (OW+18)'(INV_LOG2_10);
  assign y_o  = OW'(prod >>> 16);
endmodule
