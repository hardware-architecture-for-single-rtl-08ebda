// threshold_compare: Block 3, comparator between the initial DFT and T.
//
// Scans f = 0..N-1, reading V(f) from the FFT memory through v_addr, and sets
// Cr(f) = 1 when |V(f)| > T, otherwise 0 (eq. 6). The comparison is made
// exactly on squares, |V|^2 = re^2 + im^2 against T^2, which is equivalent for
// T >= 0 and needs no magnitude square root per bin (this design's choice).
// T is in the LSB scale of the initial DFT. Timing: one bin per clock; done
// pulses N cycles after start, when cr_o (bit f = Cr(f)) and the number of
// ones, ones_o, are valid. They hold until the next start.
module threshold_compare
  import sira_pkg::*;
#(
  parameter int N  = 512,
  parameter int TW = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [TW-1:0]          t_i,
  output logic [$clog2(N)-1:0]   v_addr,
  input  spec_t                  v_i,
  output logic [N-1:0]           cr_o,
  output logic [$clog2(N+1)-1:0] ones_o,
  output logic                   busy,
  output logic                   done
);
  logic [$clog2(N)-1:0] f_q;
  logic signed [2*VW+1:0] mag2;
  logic [2*TW-1:0]      t2;
  logic                 above;

  assign v_addr = f_q;
  assign mag2   = (2*VW+2)'(v_i.re * v_i.re) + (2*VW+2)'(v_i.im * v_i.im);
  assign t2     = (2*TW)'(t_i) * (2*TW)'(t_i);
  assign above  = (2*TW+2)'(unsigned'(mag2)) > (2*TW+2)'(t2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_q <= '0; cr_o <= '0; ones_o <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        f_q <= '0; ones_o <= '0; busy <= 1'b1;
      end else if (busy) begin
        cr_o[f_q] <= above;
        if (above) ones_o <= ones_o + 1'b1;
        f_q <= f_q + 1'b1;
        if (f_q == ($clog2(N))'(N - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
