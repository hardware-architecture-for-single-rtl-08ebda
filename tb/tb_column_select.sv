// tb_column_select: random Cr vectors with few and with too many ones; the
// index list must hold the first KMAX set positions in ascending order, K and
// the overflow flag must match, and done must come N cycles after start.
module tb_column_select;
  localparam int N = 128, KMAX = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, ovf;
  logic [N-1:0] cr;
  logic [6:0] pos [KMAX];
  logic [3:0] k;
  int checks = 0, failures = 0, n_ovf = 0;

  column_select #(.N(N), .KMAX(KMAX)) dut (.clk, .rst_n, .start, .cr_i(cr), .pos_o(pos), .k_o(k),
                                          .overflow_o(ovf), .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, want [$];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 40; r++) begin
      cr = '0;
      for (int j = 0; j < $urandom_range(r % 2 ? 20 : 7); j++) cr[$urandom_range(N - 1)] = 1'b1;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      want.delete();
      for (int f = 0; f < N; f++) if (cr[f]) want.push_back(f);
      checks += 3;
      if (int'(k) != (want.size() > KMAX ? KMAX : want.size())) begin failures++; $display("FAIL K"); end
      if (ovf != (want.size() > KMAX)) begin failures++; $display("FAIL overflow"); end
      if (lat != N) begin failures++; $display("FAIL latency %0d", lat); end
      if (ovf) n_ovf++;
      for (int i = 0; i < KMAX && i < want.size(); i++) begin
        checks++;
        if (int'(pos[i]) != want[i]) begin failures++; $display("FAIL pos(%0d)", i); end
      end
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL overflow never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
