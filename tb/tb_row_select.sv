// tb_row_select: N = 64, M = 16, K = 5 random columns and random positions;
// every element written must equal exp(+j 2 pi P_v(m) pos(i) / N) at address
// m*KMAX + i, and the block must take M*K cycles. K = 0 must finish at once.
module tb_row_select;
  import sira_pkg::*;
  localparam int N = 64, M = 16, KMAX = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, we;
  logic [3:0] k;
  logic [5:0] pos [KMAX];
  logic [3:0] pa;
  logic [5:0] pvm [M];
  logic [6:0] wa;
  mat_t wd;
  mat_t got [M*KMAX];
  int nw;
  int checks = 0, failures = 0;

  row_select #(.N(N), .M(M), .KMAX(KMAX)) dut (.clk, .rst_n, .start, .k_i(k), .pos_i(pos), .pv_addr(pa),
                                              .pv_i(pvm[pa]), .we, .waddr(wa), .wdata(wd), .busy, .done);
  always #5 clk = ~clk;
  always @(posedge clk) if (we) begin got[wa] <= wd; nw <= nw + 1; end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    real th;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 4; r++) begin
      k = 4'(r == 3 ? 0 : 5);
      for (int i = 0; i < KMAX; i++) pos[i] = 6'($urandom);
      for (int m = 0; m < M; m++) pvm[m] = 6'($urandom);
      nw = 0;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != M * int'(k) + (k == 0 ? 0 : 0)) begin failures++; $display("FAIL latency %0d", lat); end
      if (nw != M * int'(k)) begin failures++; $display("FAIL writes %0d", nw); end
      for (int m = 0; m < M; m++)
        for (int i = 0; i < int'(k); i++) begin
          th = 2.0 * 3.14159265358979 * real'((int'(pvm[m]) * int'(pos[i])) % N) / real'(N);
          checks++;
          if ((real'(got[m*KMAX+i].re) / 16777216.0 - $cos(th)) ** 2 +
              (real'(got[m*KMAX+i].im) / 16777216.0 - $sin(th)) ** 2 > 1e-8) begin
            failures++; $display("FAIL A_CS(%0d,%0d)", m, i);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
