// tb_threshold_compare: a behavioural 64-word spectrum memory with random
// values, some forced exactly onto the threshold (|V| = T must give 0) or one
// LSB above it; Cr, the count of ones and the N-cycle latency are checked.
module tb_threshold_compare;
  import sira_pkg::*;
  localparam int N = 64;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [39:0] t;
  logic [5:0] va;
  spec_t vm [N];
  spec_t vi;
  logic [N-1:0] cr;
  logic [6:0] ones;
  int checks = 0, failures = 0;

  threshold_compare #(.N(N), .TW(40)) dut (.clk, .rst_n, .start, .t_i(t), .v_addr(va), .v_i(vi),
                                           .cr_o(cr), .ones_o(ones), .busy, .done);
  assign vi = vm[va];
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, cnt;
    logic want;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 20; r++) begin
      t = 40'($urandom_range(200000));
      for (int f = 0; f < N; f++) begin
        case ($urandom_range(3))
          0: begin vm[f].re = 32'(t); vm[f].im = 0; end                 // exactly T
          1: begin vm[f].re = 0; vm[f].im = -32'(t) - 1; end            // one above
          default: begin
            vm[f].re = 32'($signed($urandom_range(400000)) - 200000);
            vm[f].im = 32'($signed($urandom_range(400000)) - 200000);
          end
        endcase
      end
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      cnt = 0;
      for (int f = 0; f < N; f++) begin
        want = (longint'(vm[f].re) * vm[f].re + longint'(vm[f].im) * vm[f].im) > longint'(t) * longint'(t);
        cnt += int'(want);
        checks++;
        if (cr[f] != want) begin failures++; $display("FAIL Cr(%0d)", f); end
      end
      checks += 2;
      if (int'(ones) != cnt) begin failures++; $display("FAIL ones %0d vs %0d", ones, cnt); end
      if (lat != N) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
