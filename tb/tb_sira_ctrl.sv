// tb_sira_ctrl: a behavioural model answers every start pulse of the
// sequencer with a done pulse after a random delay, with the threshold made
// to finish both before and after the random selection. The order of the
// start pulses, the parallel start of the two Part-1 and the two Part-2
// multiplications, that no block starts before the blocks it depends on
// have finished, and the final done pulse are checked.
module tb_sira_ctrl;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done_o;
  logic [11:0] st, dn;
  int checks = 0, failures = 0;
  int order [$];

  sira_ctrl dut (.clk, .rst_n, .start,
    .rnd_done(dn[0]), .thr_done(dn[1]), .fft_done(dn[2]), .cmp_done(dn[3]), .col_done(dn[4]),
    .row_done(dn[5]), .trn_done(dn[6]), .mulp_done(dn[7]), .mulx_done(dn[8]), .inv_done(dn[9]),
    .mult_done(dn[10]), .spc_done(dn[11]),
    .rnd_start(st[0]), .thr_start(st[1]), .fft_start(st[2]), .cmp_start(st[3]), .col_start(st[4]),
    .row_start(st[5]), .trn_start(st[6]), .mulp_start(st[7]), .mulx_start(st[8]), .inv_start(st[9]),
    .mult_start(st[10]), .spc_start(st[11]), .busy, .done_o);
  always #5 clk = ~clk;

  int delay [12];
  bit seen_done [12];
  int prereq_bad = 0;
  // blocks whose done must precede the start of block b
  function automatic bit ready(int b);
    case (b)
      2: return seen_done[0];
      3: return seen_done[2] && seen_done[1];
      4: return seen_done[3];
      5: return seen_done[4];
      6: return seen_done[5];
      7, 8: return seen_done[6];
      9: return seen_done[7] && seen_done[8];
      10: return seen_done[9];
      11: return seen_done[10];
      default: return 1'b1;
    endcase
  endfunction
  // behavioural blocks: done after delay[b] cycles
  for (genvar b = 0; b < 12; b++) begin : g_blk
    initial begin
      dn[b] = 1'b0;
      forever begin
        @(posedge clk);
        if (st[b]) begin
          order.push_back(b);
          if (!ready(b)) prereq_bad++;
          repeat (delay[b]) @(posedge clk);
          #1 dn[b] = 1'b1;
          @(posedge clk);
          #1 dn[b] = 1'b0;
          seen_done[b] = 1'b1;
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_o [12] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 6; r++) begin
      foreach (delay[i]) delay[i] = $urandom_range(20);
      delay[1] = (r % 2) ? 60 : 0;      // threshold after / before the selection
      order.delete();
      foreach (seen_done[i]) seen_done[i] = 1'b0;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      while (!done_o) @(negedge clk);
      checks += 2;
      if (order.size() != 12) begin failures++; $display("FAIL %0d starts", order.size()); end
      // rnd/thr start together, mulp/mulx start together; others strictly in order
      begin
        int ok = 1;
        if (order.size() == 12) begin
          if (!((order[0] == 0 && order[1] == 1) || (order[0] == 1 && order[1] == 0))) ok = 0;
          for (int i = 2; i < 7; i++) if (order[i] != i) ok = 0;
          if (!((order[7] == 7 && order[8] == 8) || (order[7] == 8 && order[8] == 7))) ok = 0;
          for (int i = 9; i < 12; i++) if (order[i] != i) ok = 0;
        end else ok = 0;
        if (!ok) begin failures++; $display("FAIL start order"); end
      end
      checks++;
      if (!seen_done[11]) begin failures++; $display("FAIL done_o before spectral positioning"); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    checks++;
    if (prereq_bad != 0) begin failures++; $display("FAIL %0d starts before their inputs were done", prereq_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
