// threshold_calc: Block 4, the SIRA detection threshold.
//
// Evaluates the datapath of the threshold architecture:
//   S_A = A_1^2 + ... + A_K^2                      (amplitudes, streamed in)
//   var = M * (N-M)/(N-1) * S_A                    (noise variance, eq. 3)
//   T   = sqrt( var * (-1) * log10(1 - P^(1/N)) )  (threshold)
// The two divisions (N-M)/(N-1) and 1/N run on two sequential dividers, P^(1/N)
// on pow_unit, the logarithm on the LUT-based log10_unit and the square root on
// the 32-bit non-restoring nr_sqrt. The 32-bit square-root input is reached by
// shifting the radicand right by an even amount 2s, and the root is shifted
// back left by s.
// The drawn datapath and the printed equation (4) differ: the figure takes the
// square root of var*(-log10(...)) directly, the equation squares var and
// divides by N. This unit follows the drawn datapath, which matches a DFT that
// is not normalised by 1/N (as produced by fft_r2). The figure adds plain
// amplitudes; eq. (3) sums their squares, which is what is done here.
// Units: amplitudes are unsigned Q1.15 sample units, P is Q0.32, and T is in the
// LSB scale of the initial DFT (2^-15 of a sample unit). Both eq. (3) and the
// figure use the product M*(N-M), so it does not matter whether m_cnt counts
// missing or available samples.
// Handshake: a start pulse clears the sum; amplitudes are then accepted with
// amp_valid while amp_ready is high, the one flagged amp_last ends the list. done pulses with t_o
// valid; t_o holds until the next start.
module threshold_calc #(
  parameter int LAW = 12,
  parameter int TW  = 40
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   n_len,     // N
  input  logic [15:0]   m_cnt,     // M
  input  logic [31:0]   p_i,       // P, Q0.32
  input  logic          amp_valid,
  input  logic [15:0]   amp_i,     // component amplitude, Q1.15
  input  logic          amp_last,
  output logic          amp_ready, // amplitudes are being accepted
  output logic [TW-1:0] t_o,
  output logic          busy,
  output logic          done
);
  typedef enum logic [3:0] {
    S_IDLE, S_ACC, S_DIV, S_POW, S_LOG, S_VAR, S_PROD, S_NORM, S_SQRT
  } state_t;
  state_t st;

  logic [47:0]        s_a;
  logic [39:0]        rat_q, invn_q;
  logic               div_start, div1_done, div2_done, d1_seen, d2_seen;
  logic [39:0]        q1, q2, r1_unused, r2_unused;
  logic               d1_busy, d2_busy;
  logic               pow_start, pow_done, pow_busy;
  logic [32:0]        pw;
  logic [32:0]        one_minus;
  logic signed [23:0] l10;
  logic               l10_zero;
  logic [23:0]        l_pos;       // -log10(1 - P^(1/N)), Q.15
  logic [95:0]        var_q, prod_q;
  logic [4:0]         sh;
  logic [31:0]        sq_in;
  logic               sq_start, sq_done, sq_busy;
  logic [15:0]        sq_w;
  logic [16:0]        sq_r;

  seq_divider #(.W(40)) u_div_ratio (
    .clk, .rst_n, .start(div_start),
    .num(40'(n_len - m_cnt) << 16), .den(40'(n_len) - 40'd1),
    .q(q1), .r(r1_unused), .busy(d1_busy), .done(div1_done)
  );
  seq_divider #(.W(40)) u_div_invn (
    .clk, .rst_n, .start(div_start),
    .num(40'h01_0000_0000), .den(40'(n_len)),
    .q(q2), .r(r2_unused), .busy(d2_busy), .done(div2_done)
  );

  pow_unit #(.LAW(LAW)) u_pow (
    .clk, .rst_n, .start(pow_start), .p_i, .inv_n_i(invn_q[32:0]),
    .pw_o(pw), .busy(pow_busy), .done(pow_done)
  );

  // 1 - P^(1/N); kept at least one LSB so the logarithm stays defined
  assign one_minus = (pw >= 33'h1_0000_0000) ? 33'd1 : (33'h1_0000_0000 - pw);

  log10_unit #(.XW(33), .XF(32), .LAW(LAW), .OW(24)) u_log (
    .x_i(one_minus), .y_o(l10), .zero_o(l10_zero)
  );

  nr_sqrt #(.BW(32)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .b_i(sq_in),
    .w_o(sq_w), .r_o(sq_r), .busy(sq_busy), .done(sq_done)
  );

  assign amp_ready = (st == S_ACC);

  // smallest even right shift 2*sh that brings the radicand below 2^32
  always_comb begin
    sh = '0;
    for (int s = 0; s < 32; s++)
      if ((prod_q >> (2 * s)) >= 96'h1_0000_0000) sh = 5'(s + 1);
    sq_in = 32'(prod_q >> (2 * sh));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; s_a <= '0; rat_q <= '0; invn_q <= '0; l_pos <= '0;
      var_q <= '0; prod_q <= '0; t_o <= '0; busy <= 1'b0; done <= 1'b0;
      div_start <= 1'b0; pow_start <= 1'b0; sq_start <= 1'b0;
      d1_seen <= 1'b0; d2_seen <= 1'b0;
    end else begin
      done <= 1'b0; div_start <= 1'b0; pow_start <= 1'b0; sq_start <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          s_a <= '0; busy <= 1'b1; st <= S_ACC;
        end
        S_ACC: if (amp_valid) begin
          s_a <= s_a + 48'(amp_i * amp_i);
          if (amp_last) begin
            div_start <= 1'b1; d1_seen <= 1'b0; d2_seen <= 1'b0; st <= S_DIV;
          end
        end
        S_DIV: begin
          if (div1_done) begin rat_q  <= q1; d1_seen <= 1'b1; end
          if (div2_done) begin invn_q <= q2; d2_seen <= 1'b1; end
          if ((d1_seen || div1_done) && (d2_seen || div2_done) && !div_start) begin
            pow_start <= 1'b1; st <= S_POW;
          end
        end
        S_POW: if (pow_done) st <= S_LOG;
        S_LOG: begin
          l_pos <= 24'(-l10);
          st <= S_VAR;
        end
        S_VAR: begin
          var_q <= (96'(m_cnt) * 96'(rat_q) * 96'(s_a)) >> 16;
          st <= S_PROD;
        end
        S_PROD: begin
          prod_q <= (var_q * 96'(l_pos)) >> 15;
          st <= S_NORM;
        end
        S_NORM: begin
          sq_start <= 1'b1;
          st <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          t_o  <= TW'(sq_w) << sh;
          busy <= 1'b0;
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
