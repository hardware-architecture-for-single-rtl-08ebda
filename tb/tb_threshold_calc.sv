// tb_threshold_calc: threshold for several (N, M, P, amplitude) sets against
// T = sqrt(M(N-M)/(N-1) * sum A^2 * (-log10(1 - P^(1/N)))) evaluated in
// floating point; T is returned in units of 2^-15 and must lie within 1 %.
// Amplitudes are streamed with gaps to exercise the amp_valid handshake.
module tb_threshold_calc;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, amp_valid = 1'b0, amp_last = 1'b0, amp_ready;
  logic [15:0] n_len, m_cnt, amp_i;
  logic [31:0] p_i;
  logic [39:0] t_o;
  int checks = 0, failures = 0;

  threshold_calc dut (.clk, .rst_n, .start, .n_len, .m_cnt, .p_i, .amp_valid, .amp_i, .amp_last,
                      .amp_ready, .t_o, .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int n, input int m, input real p, input int k, input real amax);
    real sa = 0.0, pq, t_ref, t_got;
    n_len = 16'(n); m_cnt = 16'(m);
    p_i = 32'(longint'(p * 4294967296.0));
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    for (int i = 0; i < k; i++) begin
      logic [15:0] a = 16'($urandom_range(int'(amax * 32768.0)) + 1);
      sa += (real'(a) / 32768.0) ** 2;
      if ($urandom_range(1)) @(negedge clk);       // idle cycle
      amp_valid = 1'b1; amp_i = a; amp_last = (i == k - 1);
      while (!amp_ready) @(negedge clk);
      @(negedge clk);
      amp_valid = 1'b0; amp_last = 1'b0;
    end
    while (!done) @(negedge clk);
    pq = real'(p_i) / 4294967296.0;
    t_ref = $sqrt(real'(m) * real'(n - m) / real'(n - 1) * sa * (-$log10(1.0 - $pow(pq, 1.0 / real'(n)))));
    t_got = real'(t_o) / 32768.0;
    checks++;
    if (t_got < 0.99 * t_ref || t_got > 1.01 * t_ref) begin
      failures++; $display("FAIL N=%0d M=%0d P=%f K=%0d: T=%f, want %f", n, m, pq, k, t_got, t_ref);
    end
  endtask

  initial begin
    n_len = '0; m_cnt = '0; p_i = '0; amp_i = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(512, 256, 0.99, 14, 0.07);
    one(512, 128, 0.99, 14, 0.07);
    one(512, 384, 0.9, 3, 0.3);
    one(256, 64, 0.95, 8, 0.1);
    one(1024, 200, 0.5, 20, 0.05);
    one(64, 16, 0.99, 1, 0.99);
    one(4096, 1000, 0.99, 50, 0.02);
    one(512, 256, 0.01, 14, 0.07);
    for (int i = 0; i < 30; i++) begin
      int n = $urandom_range(4000) + 64;
      one(n, $urandom_range(n - 2) + 1, 0.02 + 0.97 * real'($urandom_range(1000)) / 1000.0,
          $urandom_range(30) + 1, 0.05);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
