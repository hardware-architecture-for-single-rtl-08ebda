// herm_transpose: Block 7, Hermitian transpose A_CS* of the CS matrix.
//
// Reads A_CS column by column (for each column i all rows m, i.e. addresses
// m*KMAX + i) and writes the conjugated words to adjacent addresses of the
// A_CS* register (i*M + m), which is the column-wise transfer and realignment
// the source describes. The conjugation that turns the transpose into the
// Hermitian transpose is folded into the same pass.
// Timing: one word per cycle, M*K cycles; done pulses after the last write.
// The real half of wdata is the real half of rdata, passed through unchanged;
// only the imaginary half is negated.
module herm_transpose
  import sira_pkg::*;
#(
  parameter int M    = 256,
  parameter int KMAX = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(KMAX+1)-1:0] k_i,
  output logic [$clog2(M*KMAX)-1:0] raddr,
  input  mat_t                      rdata,
  output logic                      we,
  output logic [$clog2(M*KMAX)-1:0] waddr,
  output mat_t                      wdata,
  output logic                      busy,
  output logic                      done
);
  localparam int AW = $clog2(M * KMAX);

  logic [$clog2(M)-1:0]    m_q;
  logic [$clog2(KMAX)-1:0] i_q;

  assign raddr = AW'(m_q) * AW'(KMAX) + AW'(i_q);
  assign waddr = AW'(i_q) * AW'(M) + AW'(m_q);
  assign wdata = mat_conj(rdata);
  assign we    = busy;

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
        if (m_q == ($clog2(M))'(M - 1)) begin
          m_q <= '0;
          if (($clog2(KMAX+1))'(i_q) == k_i - 1'b1) begin
            busy <= 1'b0; done <= 1'b1;
          end else i_q <= i_q + 1'b1;
        end else m_q <= m_q + 1'b1;
      end
    end
  end
endmodule
