// tb_cmat_mul: random complex matrices (values up to +-4) of several shapes
// in behavioural memories; C = A*B must match a floating-point product within
// a few LSB of the 2^-24 format, and the run must take rows*cols*inner cycles.
module tb_cmat_mul;
  import sira_pkg::*;
  localparam int S = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, cwe;
  logic [15:0] nr, ni, nc;
  logic [7:0] aa, ba, ca;
  mat_t am [S*S], bm [S*S], cm [S*S];
  mat_t cd;
  int checks = 0, failures = 0;

  cmat_mul #(.AW(8), .BW(8), .CW(8), .A_STRIDE(S), .B_STRIDE(S), .C_STRIDE(S)) dut (
    .clk, .rst_n, .start, .n_rows(nr), .n_inner(ni), .n_cols(nc),
    .a_addr(aa), .a_data(am[aa]), .b_addr(ba), .b_data(bm[ba]),
    .c_we(cwe), .c_addr(ca), .c_data(cd), .busy, .done);
  always #5 clk = ~clk;
  always @(posedge clk) if (cwe) cm[ca] <= cd;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mat_t rnd();
    mat_t v;
    v.re = 40'($signed($urandom_range(1 << 27)) - (1 << 26));
    v.im = 40'($signed($urandom_range(1 << 27)) - (1 << 26));
    return v;
  endfunction

  initial begin
    int lat, shapes [4][3] = '{'{3, 7, 2}, '{1, 16, 1}, '{16, 16, 16}, '{5, 1, 4}};
    real sr, si;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (shapes[s]) begin
      nr = 16'(shapes[s][0]); ni = 16'(shapes[s][1]); nc = 16'(shapes[s][2]);
      foreach (am[i]) begin am[i] = rnd(); bm[i] = rnd(); end
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != int'(nr) * int'(ni) * int'(nc)) begin failures++; $display("FAIL latency %0d", lat); end
      for (int r = 0; r < int'(nr); r++)
        for (int c = 0; c < int'(nc); c++) begin
          sr = 0.0; si = 0.0;
          for (int l = 0; l < int'(ni); l++) begin
            sr += (real'(am[r*S+l].re) * real'(bm[l*S+c].re) - real'(am[r*S+l].im) * real'(bm[l*S+c].im)) / 16777216.0;
            si += (real'(am[r*S+l].re) * real'(bm[l*S+c].im) + real'(am[r*S+l].im) * real'(bm[l*S+c].re)) / 16777216.0;
          end
          checks++;
          if ((real'(cm[r*S+c].re) - sr) ** 2 + (real'(cm[r*S+c].im) - si) ** 2 > 8.0) begin
            failures++; $display("FAIL C(%0d,%0d)", r, c);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
