// tb_log10_unit: compares the LUT-based log10 with the real log10 for random
// Q0.32 inputs (tolerance: table resolution times 1/log2(10) plus constant
// rounding).
module tb_log10_unit;
  logic [32:0] x;
  logic signed [23:0] y;
  logic z;
  int checks = 0, failures = 0;

  log10_unit #(.XW(33), .XF(32), .LAW(12), .OW(24)) dut (.x_i(x), .y_o(y), .zero_o(z));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_l, got;
    for (int i = 0; i < 2000; i++) begin
      do x = 33'({$urandom, 1'b1}) >> $urandom_range(32); while (x == 0);
      #1;
      ref_l = $log10(real'(x) / 4294967296.0);
      got = real'(y) / 32768.0;
      checks++;
      if ((got - ref_l > 2e-4) || (ref_l - got > 2e-4 + 1e-4) || z) begin
        failures++; $display("FAIL log10(%0d) = %f, want %f", x, got, ref_l);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
