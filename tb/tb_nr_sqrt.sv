// tb_nr_sqrt: checks the non-restoring square root on corner values and
// random 32-bit radicands: W = floor(sqrt(B)), R = B - W*W, and the latency
// of BW/2 + 1 = 17 cycles from start to done.
module tb_nr_sqrt;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [31:0] b;
  logic [15:0] w;
  logic [16:0] r;
  int checks = 0, failures = 0;

  nr_sqrt #(.BW(32)) dut (.clk, .rst_n, .start, .b_i(b), .w_o(w), .r_o(r), .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [31:0] x);
    int lat = 0;
    longint ws, rs;
    @(negedge clk) begin b = x; start = 1'b1; end
    @(negedge clk) start = 1'b0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    ws = longint'($floor($sqrt(real'(x))));
    while (ws * ws > longint'(x)) ws--;
    while ((ws + 1) * (ws + 1) <= longint'(x)) ws++;
    rs = longint'(x) - ws * ws;
    checks += 3;
    if (longint'(w) != ws) begin failures++; $display("FAIL sqrt(%0d) = %0d, want %0d", x, w, ws); end
    if (longint'(r) != rs) begin failures++; $display("FAIL rem(%0d) = %0d, want %0d", x, r, rs); end
    if (lat != 17) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(32'd0); one(32'd1); one(32'd2); one(32'd3); one(32'd4); one(32'd15); one(32'd16);
    one(32'hFFFF_FFFF); one(32'hFFFE_0001); one(32'hFFFE_0000);
    for (int i = 0; i < 300; i++) one($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
