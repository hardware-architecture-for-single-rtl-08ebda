// column_select: Block 5, column selection of the DFT matrix A.
//
// The columns of A to keep are those whose index f has Cr(f) = 1. Since every
// element of A is generated on demand from the twiddle table, selecting
// columns amounts to listing their indices: the block scans Cr from f = 0 to
// N-1 and writes each f with Cr(f) = 1 into pos(0..K-1), in ascending order,
// and counts K. At most KMAX columns are kept; further ones set overflow_o and
// are dropped (KMAX is this design's choice, the source's example has K = 14).
// Timing: one bin per clock, done pulses N cycles after start; pos_o, k_o and
// overflow_o then hold until the next start.
module column_select #(
  parameter int N    = 512,
  parameter int KMAX = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [N-1:0]              cr_i,
  output logic [$clog2(N)-1:0]      pos_o [KMAX],
  output logic [$clog2(KMAX+1)-1:0] k_o,
  output logic                      overflow_o,
  output logic                      busy,
  output logic                      done
);
  logic [$clog2(N)-1:0] f_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_q <= '0; k_o <= '0; overflow_o <= 1'b0; busy <= 1'b0; done <= 1'b0;
      for (int i = 0; i < KMAX; i++) pos_o[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        f_q <= '0; k_o <= '0; overflow_o <= 1'b0; busy <= 1'b1;
      end else if (busy) begin
        if (cr_i[f_q]) begin
          if (k_o < ($clog2(KMAX+1))'(KMAX)) begin
            pos_o[k_o[$clog2(KMAX)-1:0]] <= f_q;
            k_o <= k_o + 1'b1;
          end else overflow_o <= 1'b1;
        end
        f_q <= f_q + 1'b1;
        if (f_q == ($clog2(N))'(N - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
