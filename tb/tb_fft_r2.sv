// tb_fft_r2: N = 64, M = 24 random samples at random ascending positions;
// the FFT output must match the direct zero-filled DFT of eq. (5) within a
// few LSB per bin (relative to the 2^-15 sample LSB), and done must come
// N + M + log2(N)*N/2 cycles after start.
module tb_fft_r2;
  import sira_pkg::*;
  localparam int N = 64, M = 24;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [4:0] la;
  logic [5:0] ra;
  sample_t vm [M];
  logic [5:0] pm [M];
  spec_t rv;
  int checks = 0, failures = 0;

  fft_r2 #(.N(N), .M(M)) dut (.clk, .rst_n, .start, .busy, .done, .ld_addr(la), .ld_v(vm[la]),
                              .ld_pos(pm[la]), .rd_addr(ra), .rd_v(rv));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, p;
    real sr, si, th, err;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 5; r++) begin
      p = 0;
      for (int m = 0; m < M; m++) begin
        p += 1 + $urandom_range(1);
        pm[m] = 6'(p);
        vm[m].re = 16'($urandom);
        vm[m].im = 16'($urandom);
      end
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != N + M + 6 * N / 2) begin failures++; $display("FAIL latency %0d", lat); end
      for (int f = 0; f < N; f++) begin
        sr = 0.0; si = 0.0;
        for (int m = 0; m < M; m++) begin
          th = -2.0 * 3.14159265358979 * real'(f * pm[m]) / real'(N);
          sr += real'(vm[m].re) * $cos(th) - real'(vm[m].im) * $sin(th);
          si += real'(vm[m].re) * $sin(th) + real'(vm[m].im) * $cos(th);
        end
        ra = 6'(f); #1;
        err = $sqrt((real'(rv.re) - sr) ** 2 + (real'(rv.im) - si) ** 2);
        checks++;
        if (err > 40.0) begin failures++; $display("FAIL V(%0d) = %0d,%0d want %f,%f", f, rv.re, rv.im, sr, si); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
