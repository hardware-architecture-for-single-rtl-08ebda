// tb_herm_transpose: a random M x K matrix in a behavioural source memory;
// the destination must hold conj(A(m,i)) at i*M + m after M*K cycles, with
// the source read column by column.
module tb_herm_transpose;
  import sira_pkg::*;
  localparam int M = 16, KMAX = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, we;
  logic [3:0] k;
  logic [6:0] ra, wa;
  mat_t src [M*KMAX], dst [M*KMAX];
  mat_t wd;
  int checks = 0, failures = 0, col_order_bad = 0;
  logic [6:0] last_ra;

  herm_transpose #(.M(M), .KMAX(KMAX)) dut (.clk, .rst_n, .start, .k_i(k), .raddr(ra), .rdata(src[ra]),
                                           .we, .waddr(wa), .wdata(wd), .busy, .done);
  always #5 clk = ~clk;
  always @(posedge clk) if (we) begin
    dst[wa] <= wd;
    // consecutive reads inside a column are KMAX apart
    if (busy && ra != 7'(ra % KMAX) && ra - last_ra != 7'(KMAX)) col_order_bad <= col_order_bad + 1;
    last_ra <= ra;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 3; r++) begin
      k = 4'(3 + r * 2);
      foreach (src[i]) src[i] = {8'($urandom), $urandom, 8'($urandom), $urandom};
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != M * int'(k)) begin failures++; $display("FAIL latency %0d", lat); end
      for (int m = 0; m < M; m++)
        for (int i = 0; i < int'(k); i++) begin
          checks++;
          if (dst[i*M+m].re != src[m*KMAX+i].re || dst[i*M+m].im != -src[m*KMAX+i].im) begin
            failures++; $display("FAIL element (%0d,%0d)", m, i);
          end
        end
    end
    checks++;
    if (col_order_bad != 0) begin failures++; $display("FAIL source not read column-wise"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
