// sira_pkg: number formats and helper functions shared by the single-iteration
// reconstruction (SIRA) engine.
//
// Three complex fixed-point formats are used, all two's complement:
//   sample_t : input samples and the measurement vector v, Q1.15 per part.
//   spec_t   : initial DFT values V(f), 32-bit integers whose LSB is 2^-15 of a
//              sample unit, so the DFT keeps the sample scale without any
//              per-stage scaling (growth of up to log2(N) bits is absorbed).
//   mat_t    : matrix-domain values (A_CS, A_P, its inverse, X_P, X_TP),
//              40-bit parts with MF = 24 fractional bits (range +-32768).
//   tw_t     : twiddle / DFT-matrix elements, Q2.14 per part (1.0 = 16384).
// None of these widths is given by the source architecture; they are chosen
// so that a 512-point problem with a few hundred measurements cannot overflow.
package sira_pkg;

  localparam int SW  = 16;   // sample part width
  localparam int SF  = 15;   // sample fractional bits
  localparam int VW  = 32;   // initial-DFT part width
  localparam int MWD = 40;   // matrix part width
  localparam int MF  = 24;   // matrix fractional bits
  localparam int TWW = 16;   // twiddle part width
  localparam int TWF = 14;   // twiddle fractional bits

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } sample_t;

  typedef struct packed {
    logic signed [VW-1:0] re;
    logic signed [VW-1:0] im;
  } spec_t;

  typedef struct packed {
    logic signed [MWD-1:0] re;
    logic signed [MWD-1:0] im;
  } mat_t;

  typedef struct packed {
    logic signed [TWW-1:0] re;
    logic signed [TWW-1:0] im;
  } tw_t;

  // Complex product of two matrix-domain values, rescaled by 2^-MF.
  function automatic mat_t mat_mul(input mat_t a, input mat_t b);
    logic signed [2*MWD:0] rr, ri;
    mat_t y;
    rr = (2*MWD+1)'(a.re * b.re) - (2*MWD+1)'(a.im * b.im);
    ri = (2*MWD+1)'(a.re * b.im) + (2*MWD+1)'(a.im * b.re);
    y.re = MWD'(rr >>> MF);
    y.im = MWD'(ri >>> MF);
    return y;
  endfunction

  function automatic mat_t mat_conj(input mat_t a);
    mat_t y;
    y.re = a.re;
    y.im = -a.im;
    return y;
  endfunction

  // Sample (Q1.15) to matrix format (Q.24).
  function automatic mat_t sample_to_mat(input sample_t s);
    mat_t y;
    y.re = MWD'(s.re) <<< (MF - SF);
    y.im = MWD'(s.im) <<< (MF - SF);
    return y;
  endfunction

  // Twiddle (Q2.14) to matrix format (Q.24).
  function automatic mat_t tw_to_mat(input tw_t t);
    mat_t y;
    y.re = MWD'(t.re) <<< (MF - TWF);
    y.im = MWD'(t.im) <<< (MF - TWF);
    return y;
  endfunction

endpackage
