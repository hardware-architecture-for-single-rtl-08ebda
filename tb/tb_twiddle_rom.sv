// tb_twiddle_rom: every entry of the 512-entry table against
// round(16384 * exp(-j 2 pi k / N)) within one LSB.
module tb_twiddle_rom;
  import sira_pkg::*;
  localparam int N = 512;
  logic [8:0] k;
  tw_t w;
  int checks = 0, failures = 0;

  twiddle_rom #(.N(N)) dut (.k_i(k), .w_o(w));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real c, s;
    for (int i = 0; i < N; i++) begin
      k = 9'(i); #1;
      c = 16384.0 * $cos(2.0 * 3.14159265358979 * i / N);
      s = -16384.0 * $sin(2.0 * 3.14159265358979 * i / N);
      checks += 2;
      if (real'(w.re) - c > 0.51 || c - real'(w.re) > 0.51) begin failures++; $display("FAIL re %0d: %0d vs %f", i, w.re, c); end
      if (real'(w.im) - s > 0.51 || s - real'(w.im) > 0.51) begin failures++; $display("FAIL im %0d: %0d vs %f", i, w.im, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
