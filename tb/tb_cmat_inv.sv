// tb_cmat_inv: inverts Gram matrices G = B* B of random unit-modulus M x K
// matrices (the kind of matrix the engine produces, diagonal = M), for
// K = 1, 3, 8 and 16, and checks that G * inv(G) is the identity within
// 2*K*M LSB of the 2^-24 format, the rounding the stored inverse allows (computed in floating point from the read-back inverse), plus the
// cycle count K^2 + K*(99 + 2K + (K-1)*(2K+1)).
module tb_cmat_inv;
  import sira_pkg::*;
  localparam int KMAX = 16, M = 48;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, sing;
  logic [4:0] k;
  logic [7:0] aa, ra;
  mat_t am [KMAX*KMAX];
  mat_t rd;
  real gr [KMAX][KMAX], gi [KMAX][KMAX], br [M][KMAX], bi [M][KMAX];
  int checks = 0, failures = 0;

  cmat_inv #(.KMAX(KMAX)) dut (.clk, .rst_n, .start, .k_i(k), .a_addr(aa), .a_data(am[aa]),
                               .rd_addr(ra), .rd_data(rd), .singular_o(sing), .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, kk, ks [4] = '{1, 3, 8, 16};
    real ir [KMAX][KMAX], ii [KMAX][KMAX], er, ei, worst, th;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (ks[t]) begin
      kk = ks[t];
      for (int m = 0; m < M; m++)
        for (int i = 0; i < kk; i++) begin
          th = 2.0 * 3.14159265358979 * real'($urandom_range(511)) / 512.0;
          br[m][i] = $cos(th); bi[m][i] = $sin(th);
        end
      for (int i = 0; i < kk; i++)
        for (int j = 0; j < kk; j++) begin
          gr[i][j] = 0.0; gi[i][j] = 0.0;
          for (int m = 0; m < M; m++) begin
            gr[i][j] += br[m][i] * br[m][j] + bi[m][i] * bi[m][j];
            gi[i][j] += br[m][i] * bi[m][j] - bi[m][i] * br[m][j];
          end
          am[i*KMAX+j].re = 40'(longint'(gr[i][j] * 16777216.0));
          am[i*KMAX+j].im = 40'(longint'(gi[i][j] * 16777216.0));
          gr[i][j] = real'(am[i*KMAX+j].re) / 16777216.0;
          gi[i][j] = real'(am[i*KMAX+j].im) / 16777216.0;
        end
      k = 5'(kk);
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != kk * kk + kk * (99 + 2 * kk + (kk - 1) * (2 * kk + 1))) begin
        failures++; $display("FAIL latency %0d (K=%0d)", lat, kk);
      end
      if (sing) begin failures++; $display("FAIL singular flag"); end
      for (int i = 0; i < kk; i++)
        for (int j = 0; j < kk; j++) begin
          ra = 8'(i * KMAX + j); #1;
          ir[i][j] = real'(rd.re) / 16777216.0;
          ii[i][j] = real'(rd.im) / 16777216.0;
        end
      worst = 0.0;
      for (int i = 0; i < kk; i++)
        for (int j = 0; j < kk; j++) begin
          er = (i == j) ? -1.0 : 0.0; ei = 0.0;
          for (int l = 0; l < kk; l++) begin
            er += gr[i][l] * ir[l][j] - gi[i][l] * ii[l][j];
            ei += gr[i][l] * ii[l][j] + gi[i][l] * ir[l][j];
          end
          checks++;
          if ($sqrt(er * er + ei * ei) > 2.0 * real'(kk * M) / 16777216.0) begin failures++; $display("FAIL (G*inv - I)(%0d,%0d) = %g", i, j, $sqrt(er*er+ei*ei)); end
          if (er * er + ei * ei > worst) worst = er * er + ei * ei;
        end
      $display("K=%0d worst residual %g", kk, $sqrt(worst));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
