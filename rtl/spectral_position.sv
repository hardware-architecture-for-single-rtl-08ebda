// spectral_position: spectral positioning of the reconstructed amplitudes.
//
// Builds the N-point spectrum X of the reconstructed signal: scanning
// f = 0..N-1, each bin with Cr(f) = 1 receives the next value of X_TP (they
// were computed for the selected frequencies in ascending order), every other
// bin receives 0. Bins with Cr(f) = 1 beyond the K values available (column
// overflow) also receive 0. The values are in the matrix format; X(f) is the
// complex amplitude of the component at frequency f, as in eq. (2).
// Interface: X_TP is read through x_addr; X is read through rd_addr (bin f)
// after done. Timing: one bin per clock, done pulses N cycles after start.
module spectral_position
  import sira_pkg::*;
#(
  parameter int N    = 512,
  parameter int KMAX = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [N-1:0]              cr_i,
  input  logic [$clog2(KMAX+1)-1:0] k_i,
  output logic [$clog2(KMAX)-1:0]   x_addr,
  input  mat_t                      x_data,
  input  logic [$clog2(N)-1:0]      rd_addr,
  output mat_t                      rd_data,
  output logic                      busy,
  output logic                      done
);
  mat_t                      xmem [N];
  logic [$clog2(N)-1:0]      f_q;
  logic [$clog2(KMAX+1)-1:0] i_q;
  logic                      fill;

  assign x_addr  = i_q[$clog2(KMAX)-1:0];
  assign fill    = cr_i[f_q] && (i_q < k_i);
  assign rd_data = xmem[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_q <= '0; i_q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        f_q <= '0; i_q <= '0; busy <= 1'b1;
      end else if (busy) begin
        if (fill) i_q <= i_q + 1'b1;
        f_q <= f_q + 1'b1;
        if (f_q == ($clog2(N))'(N - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (busy) xmem[f_q] <= fill ? x_data : '0;
endmodule
