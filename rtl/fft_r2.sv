// fft_r2: Block 2, initial DFT of the measurement vector.
//
// Computes V(f) = sum_m v(m) * exp(-j*2*pi*f*P_v(m)/N), f = 0..N-1, i.e. the
// N-point DFT of the signal with every missing sample set to zero (eq. 5).
// Structure: an in-place, iterative radix-2 decimation-in-time FFT with one
// butterfly and an N-word working memory. Phases after start:
//   clear   N cycles      every word set to 0
//   load    M cycles      v(m) written at address bitreverse(P_v(m)),
//                          read from the measurement vector through ld_addr
//   stages  log2(N) * N/2 cycles, one butterfly per cycle
// so done pulses N + M + log2(N)*N/2 + 1 cycles after start (3073 cycles for
// N = 512, M = 256). No scaling is applied: the result keeps the sample LSB
// (2^-15) and grows into the 32-bit spec_t parts. Twiddle products are
// rounded to nearest. The source only names an FFT block; radix, in-place
// organisation and word widths are this design's choice.
// Read-out: combinational, rd_addr = f gives V(f) once done has pulsed.
module fft_r2
  import sira_pkg::*;
#(
  parameter int N = 512,
  parameter int M = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [$clog2(M)-1:0]  ld_addr,
  input  sample_t               ld_v,
  input  logic [$clog2(N)-1:0]  ld_pos,
  input  logic [$clog2(N)-1:0]  rd_addr,
  output spec_t                 rd_v
);
  localparam int LN = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_CLR, S_LOAD, S_BFLY} state_t;
  state_t st;

  spec_t mem [N];

  logic [LN-1:0]          cnt;      // clear address / butterfly index
  logic [$clog2(M)-1:0]   mcnt;
  logic [$clog2(LN)-1:0]  stage;    // 0 .. LN-1, half size = 2^stage
  logic [LN-1:0]          top, bot, jj, tw_k, half;
  tw_t                    tw;
  spec_t                  a, b, t, y0, y1;
  logic signed [VW+TWW:0] pr, pi;

  function automatic logic [LN-1:0] bitrev(input logic [LN-1:0] x);
    for (int i = 0; i < LN; i++) bitrev[i] = x[LN-1-i];
  endfunction

  twiddle_rom #(.N(N)) u_tw (.k_i(tw_k), .w_o(tw));

  // butterfly addressing for butterfly number cnt (0..N/2-1) of this stage
  always_comb begin
    half = LN'(1) << stage;
    jj   = cnt & (half - 1'b1);                       // position inside group
    top  = ((cnt >> stage) << (stage + 1)) | jj;      // group * 2*half + j
    bot  = top | half;
    tw_k = jj << (LN - 1 - int'(stage));                    // j * N / (2*half)
  end

  assign a  = mem[top];
  assign b  = mem[bot];
  assign pr = (VW+TWW+1)'(b.re * tw.re) - (VW+TWW+1)'(b.im * tw.im) + (VW+TWW+1)'(1 << (TWF - 1));
  assign pi = (VW+TWW+1)'(b.re * tw.im) + (VW+TWW+1)'(b.im * tw.re) + (VW+TWW+1)'(1 << (TWF - 1));
  assign t.re  = VW'(pr >>> TWF);
  assign t.im  = VW'(pi >>> TWF);
  assign y0.re = a.re + t.re;
  assign y0.im = a.im + t.im;
  assign y1.re = a.re - t.re;
  assign y1.im = a.im - t.im;

  assign ld_addr = mcnt;
  assign rd_v    = mem[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; mcnt <= '0; stage <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st <= S_CLR; cnt <= '0; busy <= 1'b1;
        end
        S_CLR: begin
          cnt <= cnt + 1'b1;
          if (cnt == LN'(N - 1)) begin st <= S_LOAD; mcnt <= '0; end
        end
        S_LOAD: begin
          mcnt <= mcnt + 1'b1;
          if (mcnt == ($clog2(M))'(M - 1)) begin st <= S_BFLY; cnt <= '0; stage <= '0; end
        end
        S_BFLY: begin
          if (cnt == LN'(N / 2 - 1)) begin
            cnt <= '0;
            if (stage == ($clog2(LN))'(LN - 1)) begin
              st <= S_IDLE; busy <= 1'b0; done <= 1'b1;
            end else stage <= stage + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    case (st)
      S_CLR:  mem[cnt] <= '0;
      S_LOAD: begin
        mem[bitrev(ld_pos)].re <= VW'(ld_v.re);
        mem[bitrev(ld_pos)].im <= VW'(ld_v.im);
      end
      S_BFLY: begin
        mem[top] <= y0;
        mem[bot] <= y1;
      end
      default: ;
    endcase
  end
endmodule
