// tb_cmem: random writes and reads against a shadow copy; both read ports
// are checked on every cycle.
module tb_cmem;
  import sira_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0, we = 1'b0;
  logic [5:0] wa, ra [2];
  mat_t wd, rd [2];
  mat_t shadow [DEPTH];
  logic [DEPTH-1:0] valid = '0;
  int checks = 0, failures = 0;

  cmem #(.DEPTH(DEPTH), .NRD(2)) dut (.clk, .we, .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        if (valid[ra[p]]) begin
          checks++;
          if (rd[p] != shadow[ra[p]]) begin failures++; $display("FAIL port %0d addr %0d", p, ra[p]); end
        end
      end
      we = $urandom_range(1);
      wa = 6'($urandom);
      wd = {$urandom, $urandom, $urandom};
      ra[0] = 6'($urandom); ra[1] = 6'($urandom);
      @(posedge clk);
      if (we) begin shadow[wa] = wd; valid[wa] = 1'b1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
