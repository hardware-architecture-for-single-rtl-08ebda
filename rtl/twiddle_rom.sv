// twiddle_rom: constant table of W_N^k = exp(-j*2*pi*k/N), k = 0..N-1.
//
// The same table serves two purposes: it supplies the FFT twiddle factors and,
// addressed with (n*k) mod N and conjugated, it supplies any element of the
// N x N DFT matrix A without storing the matrix itself. The entries are
// computed at elaboration from cos/sin and rounded to Q2.14 (1.0 = 16384).
// Interface: k_i is the table address, w_o the entry; the read is
// combinational (an FPGA would map it onto a LUT/ROM).
module twiddle_rom
  import sira_pkg::*;
#(
  parameter int N = 512
) (
  input  logic [$clog2(N)-1:0] k_i,
  output tw_t                  w_o
);
  typedef logic signed [TWW-1:0] rom_t [N];

  // part = 0: cos(2*pi*k/N), part = 1: -sin(2*pi*k/N), rounded half away from zero
  function automatic rom_t gen(input int part);
    rom_t r;
    real v;
    for (int k = 0; k < N; k++) begin
      if (part == 0) v = $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(N)) * 16384.0;
      else           v = -$sin(2.0 * 3.14159265358979323846 * real'(k) / real'(N)) * 16384.0;
      r[k] = TWW'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
    return r;
  endfunction

  localparam rom_t ROM_RE = gen(0);
  localparam rom_t ROM_IM = gen(1);

  assign w_o.re = ROM_RE[k_i];
  assign w_o.im = ROM_IM[k_i];
endmodule
