// cmat_inv: inversion of the K x K matrix A_P (the "(-1)" block).
//
// Gauss-Jordan elimination on the augmented matrix [A_P | I] held in an
// internal K x 2K working array. For every pivot p:
//   1. the reciprocal 1/a_pp = conj(a_pp) / |a_pp|^2 is formed, the real
//      division 2^88 / |a_pp|^2 running on a 96-bit sequential divider;
//   2. row p is multiplied by that reciprocal (2K cycles);
//   3. for every other row r the factor a_rp is latched and row p times the
//      factor is subtracted from row r (1 + 2K cycles per row).
// Afterwards the right half of the array is A_P^-1. No pivot search is made:
// A_P = A_CS* A_CS is Hermitian positive definite whenever the K selected
// columns are independent, so its pivots stay non-zero. A zero pivot sets
// singular_o. The source suggests a QR-decomposition based RLS inversion taken
// from other work; Gauss-Jordan is this design's simpler substitute with the
// same function.
// Interface: A_P is read through a_addr (i*KMAX + j) after start; the inverse
// is read through rd_addr (i*KMAX + j) once done has pulsed.
// Timing: K^2 + K*(99 + 2K + (K-1)*(2K+1)) cycles, about 8.7k for K = 14.
module cmat_inv
  import sira_pkg::*;
#(
  parameter int KMAX = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(KMAX+1)-1:0]      k_i,
  output logic [$clog2(KMAX*KMAX)-1:0]   a_addr,
  input  mat_t                           a_data,
  input  logic [$clog2(KMAX*KMAX)-1:0]   rd_addr,
  output mat_t                           rd_data,
  output logic                           singular_o,
  output logic                           busy,
  output logic                           done
);
  localparam int KB = $clog2(KMAX + 1);
  localparam int IB = $clog2(KMAX);
  localparam int JB = $clog2(2 * KMAX);
  localparam int XB = $clog2(2 * KMAX * KMAX);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_PIV, S_DIV, S_NORM, S_FACT, S_ELIM} state_t;
  state_t st;

  mat_t aug [2 * KMAX * KMAX];      // row r, column j at r*2*KMAX + j

  logic [IB-1:0] p_q, r_q, li_q, lj_q;
  logic [JB-1:0] j_q;
  logic [JB-1:0] jmax;              // 2K - 1
  mat_t          piv, rinv, fac;
  logic          dv_start, dv_done, dv_busy;
  logic [95:0]   dv_q, dv_r, mag2;
  logic signed [136:0] rv_re, rv_im;   // conj(piv) * 2^88/|piv|^2
  mat_t          row_p, row_r, upd;
  mat_t          one;

  function automatic logic [XB-1:0] ix(input logic [IB-1:0] r, input logic [JB-1:0] j);
    return XB'(r) * XB'(2 * KMAX) + XB'(j);
  endfunction

  // logical column j of [A | I] (0..2K-1) to its place in the working array
  function automatic logic [JB-1:0] pcol(input logic [JB-1:0] j, input logic [KB-1:0] k);
    return (j < JB'(k)) ? j : j - JB'(k) + JB'(KMAX);
  endfunction

  assign jmax   = JB'(2 * k_i) - 1'b1;
  assign a_addr = ($clog2(KMAX*KMAX))'(li_q) * ($clog2(KMAX*KMAX))'(KMAX) + ($clog2(KMAX*KMAX))'(lj_q);
  assign rd_data = aug[XB'(rd_addr / KMAX) * XB'(2 * KMAX) + XB'(KMAX) + XB'(rd_addr % KMAX)];

  assign piv  = aug[ix(p_q, JB'(p_q))];
  assign mag2  = 96'(piv.re * piv.re) + 96'(piv.im * piv.im);
  assign row_p = aug[ix(p_q, pcol(j_q, k_i))];
  assign row_r = aug[ix(r_q, pcol(j_q, k_i))];
  always_comb begin
    upd    = mat_mul(fac, row_p);
    upd.re = row_r.re - upd.re;
    upd.im = row_r.im - upd.im;
  end
  // piv has 24 fractional bits, so conj(piv) * 2^88 / |piv|^2 carries 64:
  // shifting right by 40 leaves 1/piv with 24
  assign rv_re = 137'(piv.re) * 137'(signed'({1'b0, dv_q}));
  assign rv_im = -(137'(piv.im) * 137'(signed'({1'b0, dv_q})));
  assign one.re = MWD'(1) <<< MF;
  assign one.im = '0;

  seq_divider #(.W(96)) u_div (
    .clk, .rst_n, .start(dv_start), .num(96'd1 << 88), .den(mag2),
    .q(dv_q), .r(dv_r), .busy(dv_busy), .done(dv_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; p_q <= '0; r_q <= '0; li_q <= '0; lj_q <= '0; j_q <= '0;
      rinv <= '0; fac <= '0; dv_start <= 1'b0; singular_o <= 1'b0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0; dv_start <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          li_q <= '0; lj_q <= '0; p_q <= '0; singular_o <= 1'b0;
          if (k_i == '0) done <= 1'b1;
          else begin busy <= 1'b1; st <= S_LOAD; end
        end
        S_LOAD: begin
          if (KB'(lj_q) == k_i - 1'b1) begin
            lj_q <= '0;
            if (KB'(li_q) == k_i - 1'b1) st <= S_PIV;
            else li_q <= li_q + 1'b1;
          end else lj_q <= lj_q + 1'b1;
        end
        S_PIV: begin
          if (mag2 == '0) singular_o <= 1'b1;
          dv_start <= 1'b1;
          st <= S_DIV;
        end
        S_DIV: if (dv_done) begin
          rinv.re <= MWD'(rv_re >>> 40);
          rinv.im <= MWD'(rv_im >>> 40);
          j_q  <= '0;
          st   <= S_NORM;
        end
        S_NORM: begin
          if (j_q == jmax) begin
            j_q <= '0;
            r_q <= (p_q == '0) ? IB'(1) : '0;
            st  <= (k_i == KB'(1)) ? S_IDLE : S_FACT;
            if (k_i == KB'(1)) begin busy <= 1'b0; done <= 1'b1; end
          end else j_q <= j_q + 1'b1;
        end
        S_FACT: begin
          fac <= aug[ix(r_q, JB'(p_q))];
          j_q <= '0;
          st  <= S_ELIM;
        end
        S_ELIM: begin
          if (j_q == jmax) begin
            j_q <= '0;
            // next row other than the pivot row
            if ((KB'(r_q) == k_i - 1'b1) || (KB'(r_q) == k_i - KB'(2) && KB'(p_q) == k_i - 1'b1)) begin
              if (KB'(p_q) == k_i - 1'b1) begin
                busy <= 1'b0; done <= 1'b1; st <= S_IDLE;
              end else begin
                p_q <= p_q + 1'b1; st <= S_PIV;
              end
            end else begin
              r_q <= (r_q + 1'b1 == p_q) ? r_q + IB'(2) : r_q + 1'b1;
              st  <= S_FACT;
            end
          end else j_q <= j_q + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    case (st)
      S_LOAD: begin
        aug[ix(li_q, JB'(lj_q))]             <= a_data;
        aug[ix(li_q, JB'(lj_q) + JB'(KMAX))] <= (li_q == lj_q) ? one : '0;
      end
      S_NORM: aug[ix(p_q, pcol(j_q, k_i))] <= mat_mul(rinv, row_p);
      S_ELIM: aug[ix(r_q, pcol(j_q, k_i))] <= upd;
      default: ;
    endcase
  end
endmodule
