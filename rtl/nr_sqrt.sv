// nr_sqrt: non-restoring digit-by-digit square root.
//
// Follows the published pseudo-code step for step. For i = BW/2-1 down to 0
// the partial remainder is shifted left by two with the next pair of radicand
// bits B[2i+1:2i] appended; if the previous remainder was non-negative the
// value {w,01} is subtracted, otherwise {w,11} is added, and the new root bit
// is 1 when the new remainder is non-negative. A final step adds {w,1} to a
// negative remainder. For the default BW = 32 this gives the 16-bit root W
// and the 17-bit remainder R of the source (B = W*W + R).
// Timing: one iteration per clock; after start the result is ready and done
// pulses BW/2 + 1 cycles later (16 iterations plus the correction step).
module nr_sqrt #(
  parameter int BW = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [BW-1:0]      b_i,
  output logic [BW/2-1:0]    w_o,
  output logic [BW/2:0]      r_o,
  output logic               busy,
  output logic               done
);
  localparam int WW = BW / 2;
  localparam int CW = $clog2(WW + 1);

  logic [BW-1:0]        b_q;
  logic signed [WW+2:0] r_q;     // partial remainder r_i (signed)
  logic [WW-1:0]        w_q;     // partial root w_i
  logic [CW-1:0]        i_q;     // iterations left
  logic                 fix_q;   // final correction pending

  logic signed [WW+2:0] r_shift, r_next;
  logic [1:0]           pair;

  assign pair    = b_q[BW-1 -: 2];
  assign r_shift = (r_q <<< 2) + (WW+3)'(pair);
  assign r_next  = (r_q >= 0) ? r_shift - (WW+3)'({w_q, 2'b01})
                              : r_shift + (WW+3)'({w_q, 2'b11});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q <= '0; r_q <= '0; w_q <= '0; i_q <= '0; fix_q <= 1'b0;
      busy <= 1'b0; done <= 1'b0; w_o <= '0; r_o <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        b_q   <= b_i;
        r_q   <= '0;           // r_16 = 0
        w_q   <= '0;           // w_16 = 0
        i_q   <= CW'(WW);
        fix_q <= 1'b0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (i_q != 0) begin
          b_q <= b_q << 2;
          r_q <= r_next;
          w_q <= {w_q[WW-2:0], ~r_next[WW+2]};
          i_q <= i_q - 1'b1;
          if (i_q == 1) fix_q <= 1'b1;
        end else if (fix_q) begin
          fix_q <= 1'b0;
          busy  <= 1'b0;
          done  <= 1'b1;
          w_o   <= w_q;
          if (r_q < 0) r_o <= (WW+1)'(r_q + (WW+3)'({w_q, 1'b1}));
          else         r_o <= (WW+1)'(r_q);
        end
      end
    end
  end
endmodule
