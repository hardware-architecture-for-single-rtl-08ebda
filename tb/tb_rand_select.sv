// tb_rand_select: streams N = 64 numbered samples (with idle gaps) for
// several seeds and M; exactly M distinct positions must be kept, in
// ascending order, each with its own sample; two seeds must give different
// selections; done must follow the N-th sample by one cycle.
module tb_rand_select;
  import sira_pkg::*;
  localparam int N = 64, M = 20;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, x_valid = 1'b0;
  logic [31:0] seed;
  sample_t x;
  logic [4:0] ra [2];
  sample_t v [2];
  logic [5:0] pv [2];
  int checks = 0, failures = 0;

  rand_select #(.N(N), .M(M), .NRD(2)) dut (.clk, .rst_n, .start, .seed, .x_valid, .x_i(x), .busy, .done,
                                           .rd_addr(ra), .v_o(v), .pv_o(pv));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int prev [M];
  initial begin
    int lat, same;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 10; r++) begin
      seed = $urandom;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      for (int n = 0; n < N; n++) begin
        if ($urandom_range(3) == 0) begin x_valid = 1'b0; @(negedge clk); end
        x_valid = 1'b1; x.re = 16'(n * 3 + r); x.im = -16'(n);
        @(negedge clk);
      end
      x_valid = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; if (lat > 5) break; end
      checks++;
      if (lat != 0) begin failures++; $display("FAIL done latency %0d", lat); end
      same = 0;
      for (int m = 0; m < M; m++) begin
        ra[0] = 5'(m); ra[1] = 5'(M - 1 - m); #1;
        checks += 3;
        if (v[0].re != 16'(pv[0] * 3 + r) || v[0].im != -16'(pv[0])) begin failures++; $display("FAIL sample"); end
        if (m > 0 && pv[0] <= 6'(prev[m-1])) begin failures++; $display("FAIL order"); end
        if (v[1].im != -16'(pv[1])) begin failures++; $display("FAIL port 1"); end
        if (r > 0 && prev[m] == int'(pv[0])) same++;
        prev[m] = int'(pv[0]);
      end
      if (r > 0) begin
        checks++;
        if (same == M) begin failures++; $display("FAIL same selection for two seeds"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
