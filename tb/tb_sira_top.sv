// tb_sira_top: end-to-end test of the reconstruction engine at its default
// size (N = 512, M = 256, KMAX = 32).
//
// Two complete operations are run on a sparse signal of 14 complex
// exponentials at distinct frequencies:
//   1. P = 0.99: the normal case; the selected frequencies must include all
//      14 components and the spectrum must equal the true amplitudes.
//   2. P = 0.01: a low threshold, so more than KMAX bins exceed it and the
//      column-overflow path is taken.
// For each run the testbench reads back the measurement vector and checks it
// against the streamed samples, recomputes independently (in floating point)
// the threshold from its formula, the initial DFT and the comparator output,
// and solves the least-squares problem (A_CS* A_CS) X = A_CS* v for the
// selected columns by Gaussian elimination, then compares the engine's
// spectrum bin by bin. Bins whose |V| lies within 0.5 % of T are not judged.
module tb_sira_top;
  import sira_pkg::*;

  localparam int N = 512, M = 256, KMAX = 32, K = 14;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [31:0] seed, p_i;
  logic x_valid = 1'b0, x_ready, amp_valid = 1'b0, amp_last = 1'b0, amp_ready;
  sample_t x_i;
  logic [15:0] amp_i;
  logic busy, done, overflow_o, singular_o;
  logic [39:0] t_o;
  logic [N-1:0] cr_o;
  logic [$clog2(KMAX+1)-1:0] k_o;
  logic [$clog2(M)-1:0] v_rd_addr = '0;
  sample_t v_rd_data;
  logic [$clog2(N)-1:0] pv_rd_data, x_rd_addr = '0;
  mat_t x_rd_data;

  sira_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_overflow = 0, n_detect_all = 0, n_above = 0, n_runs = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // signal description
  int   kf [K];
  real  ar [K], ai [K], amag [K];
  sample_t xs [N];
  int   pos [M];
  real  vr [M], vi [M];

  // least-squares reference
  real gr [KMAX][KMAX+1], gi [KMAX][KMAX+1];
  real xr [KMAX], xi [KMAX];

  task automatic make_signal();
    int used [N];
    foreach (used[i]) used[i] = 0;
    for (int i = 0; i < K; i++) begin
      int f;
      real ph;
      do f = $urandom_range(N - 1); while (used[f] != 0);
      used[f] = 1;
      kf[i] = f;
      amag[i] = 0.05 + 0.02 * real'($urandom_range(1000)) / 1000.0;
      ph = 2.0 * PI * real'($urandom_range(1000)) / 1000.0;
      ar[i] = amag[i] * $cos(ph);
      ai[i] = amag[i] * $sin(ph);
    end
    for (int n = 0; n < N; n++) begin
      real sr = 0.0, si = 0.0;
      for (int i = 0; i < K; i++) begin
        real th = 2.0 * PI * real'(kf[i]) * real'(n) / real'(N);
        sr += ar[i] * $cos(th) - ai[i] * $sin(th);
        si += ar[i] * $sin(th) + ai[i] * $cos(th);
      end
      xs[n].re = 16'($rtoi(sr * 32768.0 + (sr >= 0 ? 0.5 : -0.5)));
      xs[n].im = 16'($rtoi(si * 32768.0 + (si >= 0 ? 0.5 : -0.5)));
    end
  endtask

  task automatic run(input real p, input int want_overflow);
    real t_ref, t_dut, sa, var_n, pr;
    int kk, sel [KMAX], nsel, judged;
    longint t0;
    n_runs++;
    p_i  = 32'(longint'(p * 4294967296.0));
    pr   = real'(p_i) / 4294967296.0;
    seed = $urandom;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cyc;
    fork
      begin
        for (int n = 0; n < N; n++) begin
          x_valid = 1'b1; x_i = xs[n];
          while (!x_ready) @(negedge clk);
          @(negedge clk);             // accepted at the posedge in between
        end
        x_valid = 1'b0;
      end
      begin
        for (int i = 0; i < K; i++) begin
          amp_valid = 1'b1;
          amp_i = 16'($rtoi(amag[i] * 32768.0 + 0.5));
          amp_last = (i == K - 1);
          while (!amp_ready) @(negedge clk);
          @(negedge clk);
        end
        amp_valid = 1'b0; amp_last = 1'b0;
      end
    join
    while (!done) @(posedge clk);
    $display("run %0d: done after %0d cycles, K=%0d overflow=%0d T=%0d", n_runs, cyc - t0, k_o, overflow_o, t_o);
    @(negedge clk);

    // measurement vector
    for (int m = 0; m < M; m++) begin
      v_rd_addr = m[$clog2(M)-1:0];
      #1;
      pos[m] = int'(pv_rd_data);
      vr[m] = real'(v_rd_data.re) / 32768.0;
      vi[m] = real'(v_rd_data.im) / 32768.0;
      check(v_rd_data == xs[pos[m]], "measurement sample equals input sample");
      if (m > 0) check(pos[m] > pos[m-1], "positions strictly ascending");
    end

    // threshold from its formula (amplitudes as quantised)
    sa = 0.0;
    for (int i = 0; i < K; i++) begin
      real a = real'($rtoi(amag[i] * 32768.0 + 0.5)) / 32768.0;
      sa += a * a;
    end
    var_n = real'(M) * real'(N - M) / real'(N - 1) * sa;
    t_ref = $sqrt(-var_n * $log10(1.0 - $pow(pr, 1.0 / real'(N))));
    t_dut = real'(t_o) / 32768.0;
    check(t_dut > 0.99 * t_ref && t_dut < 1.01 * t_ref, $sformatf("threshold %f vs %f", t_dut, t_ref));

    // initial DFT and comparator
    nsel = 0; judged = 0;
    for (int f = 0; f < N; f++) begin
      real sr = 0.0, si = 0.0, mg;
      for (int m = 0; m < M; m++) begin
        real th = -2.0 * PI * real'(f) * real'(pos[m]) / real'(N);
        sr += vr[m] * $cos(th) - vi[m] * $sin(th);
        si += vr[m] * $sin(th) + vi[m] * $cos(th);
      end
      mg = $sqrt(sr * sr + si * si);
      if (mg > 1.005 * t_dut || mg < 0.995 * t_dut) begin
        judged++;
        check(cr_o[f] == (mg > t_dut), $sformatf("Cr(%0d) |V|=%f T=%f", f, mg, t_dut));
      end
      if (cr_o[f]) begin
        n_above++;
        if (nsel < KMAX) begin sel[nsel] = f; nsel++; end
      end
    end
    check(int'(k_o) == nsel, "K equals number of kept columns");
    check(overflow_o == ($countones(cr_o) > KMAX), "overflow flag");
    if (overflow_o) n_overflow++;
    check(overflow_o == want_overflow, "overflow as planned for this run");
    check(!singular_o, "A_P not singular");

    // least-squares reference: (A^H A) x = A^H v, A(m,i) = exp(+j 2 pi pos(m) sel(i) / N)
    kk = nsel;
    for (int i = 0; i < kk; i++) begin
      for (int j = 0; j <= kk; j++) begin gr[i][j] = 0.0; gi[i][j] = 0.0; end
      for (int m = 0; m < M; m++) begin
        real thi = 2.0 * PI * real'(pos[m] * sel[i] % N) / real'(N);
        for (int j = 0; j < kk; j++) begin
          real thj = 2.0 * PI * real'(pos[m] * sel[j] % N) / real'(N);
          gr[i][j] += $cos(thj - thi);
          gi[i][j] += $sin(thj - thi);
        end
        gr[i][kk] += $cos(thi) * vr[m] + $sin(thi) * vi[m];
        gi[i][kk] += $cos(thi) * vi[m] - $sin(thi) * vr[m];
      end
    end
    for (int c = 0; c < kk; c++) begin
      int pv = c;
      for (int r = c + 1; r < kk; r++)
        if (gr[r][c]**2 + gi[r][c]**2 > gr[pv][c]**2 + gi[pv][c]**2) pv = r;
      for (int j = 0; j <= kk; j++) begin
        real tr = gr[c][j], ti = gi[c][j];
        gr[c][j] = gr[pv][j]; gi[c][j] = gi[pv][j]; gr[pv][j] = tr; gi[pv][j] = ti;
      end
      for (int r = 0; r < kk; r++) if (r != c) begin
        real d = gr[c][c]**2 + gi[c][c]**2;
        real fr = (gr[r][c] * gr[c][c] + gi[r][c] * gi[c][c]) / d;
        real fi = (gi[r][c] * gr[c][c] - gr[r][c] * gi[c][c]) / d;
        for (int j = 0; j <= kk; j++) begin
          real ur = gr[r][j] - (fr * gr[c][j] - fi * gi[c][j]);
          real ui = gi[r][j] - (fr * gi[c][j] + fi * gr[c][j]);
          gr[r][j] = ur; gi[r][j] = ui;
        end
      end
    end
    for (int i = 0; i < kk; i++) begin
      real d = gr[i][i]**2 + gi[i][i]**2;
      xr[i] = (gr[i][kk] * gr[i][i] + gi[i][kk] * gi[i][i]) / d;
      xi[i] = (gi[i][kk] * gr[i][i] - gr[i][kk] * gi[i][i]) / d;
    end

    // spectrum: selected bins against the reference, all others zero
    begin
      int s = 0, found = 0;
      for (int f = 0; f < N; f++) begin
        real er, ei;
        x_rd_addr = f[$clog2(N)-1:0];
        #1;
        er = real'(x_rd_data.re) / 16777216.0;
        ei = real'(x_rd_data.im) / 16777216.0;
        if (s < kk && sel[s] == f) begin
          check($sqrt((er - xr[s])**2 + (ei - xi[s])**2) < 1e-3,
                $sformatf("X(%0d) = %f,%f reference %f,%f", f, er, ei, xr[s], xi[s]));
          s++;
        end else
          check(x_rd_data == '0, $sformatf("X(%0d) zero", f));
      end
      // true components (the least squares is exact when all are selected)
      for (int i = 0; i < K; i++)
        for (int j = 0; j < kk; j++)
          if (sel[j] == kf[i]) found++;
      if (found == K && !overflow_o) begin
        n_detect_all++;
        for (int i = 0; i < K; i++) begin
          x_rd_addr = kf[i][$clog2(N)-1:0];
          #1;
          check($sqrt((real'(x_rd_data.re) / 16777216.0 - ar[i])**2 +
                      (real'(x_rd_data.im) / 16777216.0 - ai[i])**2) < 2e-3,
                $sformatf("component %0d amplitude", i));
        end
      end
      $display("run %0d: %0d bins judged, %0d of %0d components selected", n_runs, judged, found, K);
    end
  endtask

  initial begin
    void'($urandom(7));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    make_signal();
    run(0.99, 0);
    run(0.01, 1);
    // every mechanism must have occurred
    check(n_detect_all >= 1, "all components detected and recovered in some run");
    check(n_overflow >= 1, "column overflow exercised");
    check(n_above > 0, "bins above threshold");
    $display("mechanisms: full detection %0d, overflow %0d, bins above threshold %0d", n_detect_all, n_overflow, n_above);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
