// pow_unit: POW block of the threshold unit, computes P^(1/N).
//
// The power is evaluated as 2^(log2(P) / N). log2(P) is taken from the same
// look-up-table logarithm as the LOG block and multiplied by the reciprocal
// 1/N delivered by the threshold unit's divider, giving the exponent
// -e (e >= 0, Q.32). 2^-e is then built bit-serially: its integer part is a
// right shift, and every set fractional bit e_k (weight 2^-k) multiplies the
// running product by the constant 2^(-2^-k), one bit per clock.
// The source names LUTs, CORDIC and polynomials as options without giving a
// POW structure; this exponent-by-factors scheme is this design's choice.
// Formats: P and 1/N are unsigned Q0.32 (1/N in 33 bits); the result is
// unsigned Q0.32 in 33 bits (1.0 = 2^32). Timing: done pulses 34 cycles
// after start.
module pow_unit #(
  parameter int LAW = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] p_i,       // probability P, Q0.32
  input  logic [32:0] inv_n_i,   // 1/N, Q0.32
  output logic [32:0] pw_o,      // P^(1/N), Q0.32
  output logic        busy,
  output logic        done
);
  typedef logic [32:0] ctab_t [33];

  // C[k] = round(2^32 * 2^(-2^-k)), k = 1..32 (C[0] unused)
  function automatic ctab_t gen();
    ctab_t c;
    c[0] = '0;
    for (int k = 1; k <= 32; k++)
      c[k] = 33'(longint'($pow(2.0, 32.0 - $pow(2.0, -real'(k)))));
    return c;
  endfunction
  localparam ctab_t C = gen();

  logic signed [23:0] lp;          // log2(P), Q.15, <= 0
  logic               lp_zero;
  logic [63:0]        e_full;      // -log2(P)/N, Q.47
  logic [35:0]        e_q;         // exponent magnitude, Q4.32
  logic [32:0]        acc;
  logic [5:0]         k_q;
  logic [65:0]        mprod;

  log2_lut #(.XW(33), .XF(32), .LAW(LAW), .OW(24)) u_log2 (
    .x_i({1'b0, p_i}), .y_o(lp), .zero_o(lp_zero)
  );

  assign e_full = 64'(unsigned'(-(25'(lp)))) * 64'(inv_n_i);
  assign mprod  = 66'(acc) * 66'(C[k_q]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_q <= '0; acc <= '0; k_q <= '0; busy <= 1'b0; done <= 1'b0; pw_o <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        e_q  <= 36'(e_full >> 15);
        acc  <= 33'h1_0000_0000;
        k_q  <= 6'd0;
        busy <= 1'b1;
      end else if (busy) begin
        if (k_q == 6'd0) begin
          // integer part of the exponent: 2^-int
          acc <= (e_q[35:32] == 4'd0) ? acc : (acc >> e_q[35:32]);
          k_q <= 6'd1;
        end else if (k_q <= 6'd32) begin
          if (e_q[32 - k_q]) acc <= 33'(mprod >> 32);
          k_q <= k_q + 6'd1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          pw_o <= lp_zero ? 33'd0 : acc;
        end
      end
    end
  end
endmodule
