// tb_spectral_position: random Cr vectors with K values (and one case with
// more ones than values); bins with Cr = 1 must receive X_TP in order, all
// other bins zero; the run takes N cycles.
module tb_spectral_position;
  import sira_pkg::*;
  localparam int N = 64, KMAX = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [N-1:0] cr;
  logic [3:0] k;
  logic [2:0] xa;
  logic [5:0] ra;
  mat_t xt [KMAX];
  mat_t rd;
  int checks = 0, failures = 0;

  spectral_position #(.N(N), .KMAX(KMAX)) dut (.clk, .rst_n, .start, .cr_i(cr), .k_i(k), .x_addr(xa),
                                              .x_data(xt[xa]), .rd_addr(ra), .rd_data(rd), .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, i, ones;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 10; r++) begin
      cr = '0;
      ones = (r == 9) ? 12 : $urandom_range(KMAX);
      while ($countones(cr) < ones) cr[$urandom_range(N - 1)] = 1'b1;
      k = 4'(ones > KMAX ? KMAX : ones);
      foreach (xt[j]) xt[j] = {$urandom, $urandom, $urandom} | 80'd1;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != N) begin failures++; $display("FAIL latency %0d", lat); end
      i = 0;
      for (int f = 0; f < N; f++) begin
        ra = 6'(f); #1;
        checks++;
        if (cr[f] && i < int'(k)) begin
          if (rd != xt[i]) begin failures++; $display("FAIL X(%0d)", f); end
          i++;
        end else if (rd != '0) begin failures++; $display("FAIL X(%0d) not zero", f); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
