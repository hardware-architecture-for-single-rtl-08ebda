// row_select: Block 6, row selection, producing the CS matrix A_CS.
//
// A_CS(m, i) = A(P_v(m), pos(i)) for m = 0..M-1, i = 0..K-1, where A is the
// N x N inverse-DFT matrix A(n, f) = exp(+j*2*pi*n*f/N) that maps the
// spectrum X onto the signal x of eq. (2). Only the rows of the measured
// positions P_v and the columns listed by column_select are formed: the
// element is read from the twiddle table at (P_v(m) * pos(i)) mod N and
// conjugated, so A itself is never stored. The sign convention of A and the
// on-demand generation are this design's choice.
// Output: one write per cycle into the A_CS register, row-major with row
// stride KMAX (address m*KMAX + i). Timing: M*K cycles, done pulses after
// the last write (K = 0 gives done one cycle after start).
// The Q2.14 table value is widened to the 24-bit fraction of mat_t, so the
// low 10 bits of each part of wdata are always zero.
module row_select
  import sira_pkg::*;
#(
  parameter int N    = 512,
  parameter int M    = 256,
  parameter int KMAX = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(KMAX+1)-1:0]     k_i,
  input  logic [$clog2(N)-1:0]          pos_i [KMAX],
  output logic [$clog2(M)-1:0]          pv_addr,
  input  logic [$clog2(N)-1:0]          pv_i,
  output logic                          we,
  output logic [$clog2(M*KMAX)-1:0]     waddr,
  output mat_t                          wdata,
  output logic                          busy,
  output logic                          done
);
  localparam int LN = $clog2(N);

  logic [$clog2(M)-1:0]    m_q;
  logic [$clog2(KMAX)-1:0] i_q;
  logic [2*LN-1:0]         prod;
  tw_t                     w;

  assign pv_addr = m_q;
  assign prod    = (2*LN)'(pv_i) * (2*LN)'(pos_i[i_q]);

  twiddle_rom #(.N(N)) u_tw (.k_i(prod[LN-1:0]), .w_o(w));

  assign we    = busy;
  assign waddr = ($clog2(M*KMAX))'(m_q) * ($clog2(M*KMAX))'(KMAX) + ($clog2(M*KMAX))'(i_q);
  assign wdata = mat_conj(tw_to_mat(w));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q <= '0; i_q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        m_q <= '0; i_q <= '0;
        if (k_i == '0) done <= 1'b1;
        else           busy <= 1'b1;
      end else if (busy) begin
        if (($clog2(KMAX+1))'(i_q) == k_i - 1'b1) begin
          i_q <= '0;
          if (m_q == ($clog2(M))'(M - 1)) begin
            busy <= 1'b0; done <= 1'b1;
          end else m_q <= m_q + 1'b1;
        end else i_q <= i_q + 1'b1;
      end
    end
  end
endmodule
