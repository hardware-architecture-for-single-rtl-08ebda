// tb_seq_divider: random and corner divisions of a 40-bit sequential divider
// against integer arithmetic, and the latency of W cycles from start to done.
module tb_seq_divider;
  localparam int W = 40;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [W-1:0] num, den, q, r;
  int checks = 0, failures = 0;

  seq_divider #(.W(W)) dut (.clk, .rst_n, .start, .num, .den, .q, .r, .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [W-1:0] n, input logic [W-1:0] d);
    int lat;
    @(negedge clk) begin num = n; den = d; start = 1'b1; end
    @(negedge clk) start = 1'b0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    checks += 3;
    if (d != 0 && (q != n / d || r != n % d)) begin
      failures += 2; $display("FAIL %0d / %0d = %0d r %0d", n, d, q, r);
    end else if (d == 0 && q != '1) begin
      failures += 2; $display("FAIL divide by zero");
    end
    if (lat != W) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    num = '0; den = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(40'h01_0000_0000, 40'd512);
    one(40'd384 << 16, 40'd511);
    one('1, 40'd1);
    one('1, '1);
    one(40'd5, 40'd7);
    one(40'd9, 40'd0);
    for (int i = 0; i < 300; i++) one({$urandom, $urandom} & 40'hFF_FFFF_FFFF, 40'($urandom_range(1 << 20) + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
