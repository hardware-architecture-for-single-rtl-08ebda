// tb_pow_unit: P^(1/N) for several probabilities and lengths against real
// arithmetic. The check is made on 1 - P^(1/N), the quantity the threshold
// uses, with the relative tolerance that the log2 table resolution allows, and on the 34-cycle latency.
module tb_pow_unit;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [31:0] p;
  logic [32:0] invn, pw;
  int checks = 0, failures = 0;

  pow_unit #(.LAW(12)) dut (.clk, .rst_n, .start, .p_i(p), .inv_n_i(invn), .pw_o(pw), .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input real pr, input int n);
    int lat;
    real pq, want, got, tol;
    @(negedge clk) begin
      p = 32'(longint'(pr * 4294967296.0));
      invn = 33'((64'd1 << 32) / n);
      start = 1'b1;
    end
    @(negedge clk) start = 1'b0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    pq = real'(p) / 4294967296.0;
    want = 1.0 - $pow(pq, 1.0 / real'(n));
    got  = 1.0 - real'(pw) / 4294967296.0;
    // relative error allowed by the log2 table (resolution 2^-12/ln2 and 2^-15)
    tol = (1.0 / 4096.0 / $ln(2.0) + 1.0 / 32768.0) / (-$ln(pq) / $ln(2.0)) + 1e-3;
    checks += 2;
    if (got < (1.0 - tol) * want || got > (1.0 + tol) * want) begin
      failures++; $display("FAIL 1-P^(1/N), P=%f N=%0d: %g, want %g", pq, n, got, want);
    end
    if (lat != 34) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    p = '0; invn = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(0.99, 512); one(0.9, 512); one(0.5, 512); one(0.01, 512); one(0.999, 256);
    one(0.95, 64); one(0.25, 2); one(0.75, 1000);
    for (int i = 0; i < 50; i++) one(0.05 + 0.94 * real'($urandom_range(1000)) / 1000.0, 16 << $urandom_range(6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
