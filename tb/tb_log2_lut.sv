// tb_log2_lut: compares the table-based log2 with the real logarithm over
// random inputs spanning the whole 33-bit range; the error must stay within
// the table resolution (2^-12 / ln 2 plus rounding), and x = 0 must be flagged.
module tb_log2_lut;
  logic [32:0] x;
  logic signed [23:0] y;
  logic z;
  int checks = 0, failures = 0;

  log2_lut #(.XW(33), .XF(32), .LAW(12), .OW(24)) dut (.x_i(x), .y_o(y), .zero_o(z));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_l, got, tol;
    tol = 1.0 / 4096.0 / $ln(2.0) + 2.0 / 32768.0;
    x = '0; #1;
    checks++; if (!z) begin failures++; $display("FAIL zero flag"); end
    for (int i = 0; i < 2000; i++) begin
      int sh = $urandom_range(32);
      x = 33'({$urandom, 1'b1}) >> sh;
      if (x == 0) x = 33'd1;
      #1;
      ref_l = $ln(real'(x)) / $ln(2.0) - 32.0;
      got = real'(y) / 32768.0;
      checks++;
      if (got > ref_l + 1.0 / 32768.0 || got < ref_l - tol || z) begin
        failures++; $display("FAIL log2(%0d) = %f, want %f", x, got, ref_l);
      end
    end
    // exact powers of two
    for (int e = 0; e < 33; e++) begin
      x = 33'd1 << e; #1;
      checks++;
      if (y != 24'(signed'(e - 32)) * 32768) begin failures++; $display("FAIL log2(2^%0d)", e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
