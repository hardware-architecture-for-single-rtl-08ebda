// cmat_mul: complex matrix multiplier, C = A * B.
//
// Used three times: A_P = A_CS* A_CS (K x K), X_P = A_CS* v (K x 1) and
// X_TP = A_P^-1 X_P (K x 1). The operands live in matrix registers read
// through combinational ports: A(r, l) at r*A_STRIDE + l, B(l, c) at
// l*B_STRIDE + c; C(r, c) is written to r*C_STRIDE + c. One complex
// multiply-accumulate per clock into a full-precision accumulator; the sum is
// rounded down to the matrix format (24 fractional bits) when written.
// Dimensions n_rows, n_inner, n_cols are set at start. Timing:
// n_rows*n_cols*n_inner cycles; done pulses one cycle after the last write.
// The source only draws the multiply circuits; the serial MAC is this
// design's choice.
module cmat_mul
  import sira_pkg::*;
#(
  parameter int AW       = 13,
  parameter int BW       = 13,
  parameter int CW       = 10,
  parameter int A_STRIDE = 256,
  parameter int B_STRIDE = 32,
  parameter int C_STRIDE = 32,
  parameter int DW       = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] n_rows,
  input  logic [DW-1:0] n_inner,
  input  logic [DW-1:0] n_cols,
  output logic [AW-1:0] a_addr,
  input  mat_t          a_data,
  output logic [BW-1:0] b_addr,
  input  mat_t          b_data,
  output logic          c_we,
  output logic [CW-1:0] c_addr,
  output mat_t          c_data,
  output logic          busy,
  output logic          done
);
  localparam int PW = 2 * MWD + 16;   // accumulator part width

  logic [DW-1:0] r_q, c_q, l_q;
  logic signed [PW-1:0] acc_re, acc_im, p_re, p_im, s_re, s_im;
  logic last_l;

  assign a_addr = AW'(r_q) * AW'(A_STRIDE) + AW'(l_q);
  assign b_addr = BW'(l_q) * BW'(B_STRIDE) + BW'(c_q);
  assign p_re   = PW'(a_data.re * b_data.re) - PW'(a_data.im * b_data.im);
  assign p_im   = PW'(a_data.re * b_data.im) + PW'(a_data.im * b_data.re);
  assign s_re   = acc_re + p_re;
  assign s_im   = acc_im + p_im;
  assign last_l = (l_q == n_inner - 1'b1);

  assign c_we      = busy && last_l;
  assign c_addr    = CW'(r_q) * CW'(C_STRIDE) + CW'(c_q);
  assign c_data.re = MWD'(s_re >>> MF);
  assign c_data.im = MWD'(s_im >>> MF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= '0; c_q <= '0; l_q <= '0; acc_re <= '0; acc_im <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        r_q <= '0; c_q <= '0; l_q <= '0; acc_re <= '0; acc_im <= '0;
        if (n_rows == '0 || n_inner == '0 || n_cols == '0) done <= 1'b1;
        else busy <= 1'b1;
      end else if (busy) begin
        if (last_l) begin
          acc_re <= '0; acc_im <= '0; l_q <= '0;
          if (c_q == n_cols - 1'b1) begin
            c_q <= '0;
            if (r_q == n_rows - 1'b1) begin
              busy <= 1'b0; done <= 1'b1;
            end else r_q <= r_q + 1'b1;
          end else c_q <= c_q + 1'b1;
        end else begin
          acc_re <= s_re; acc_im <= s_im; l_q <= l_q + 1'b1;
        end
      end
    end
  end
endmodule
