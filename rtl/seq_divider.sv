// seq_divider: sequential restoring divider for unsigned integers.
//
// Computes q = num / den and r = num % den, one quotient bit per clock, so a
// division takes W cycles after start (done pulses in cycle W). The threshold
// unit uses two of them, for (N-M)/(N-1) and for 1/N. A zero divisor returns
// an all-ones quotient. The architecture only draws the division operators;
// the restoring radix-2 scheme is this design's choice.
module seq_divider #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic [W-1:0] q,
  output logic [W-1:0] r,
  output logic         busy,
  output logic         done
);
  logic [W-1:0] d_q;
  logic [W-1:0] rem;
  logic [W-1:0] quo;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W+1:0] trial;   // shifted partial remainder minus divisor

  assign trial = {1'b0, rem, quo[W-1]} - {2'b00, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q <= '0; rem <= '0; quo <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
      q <= '0; r <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        d_q  <= den;
        rem  <= '0;
        quo  <= num;
        cnt  <= ($clog2(W+1))'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W+1]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], quo[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= (!trial[W+1]) ? {quo[W-2:0], 1'b1} : {quo[W-2:0], 1'b0};
          r    <= (!trial[W+1]) ? trial[W-1:0] : {rem[W-2:0], quo[W-1]};
        end
      end
    end
  end
endmodule
