// rand_select: Block 1, random selection of M of the N signal samples.
//
// The full signal x(0..N-1) is streamed in, one sample per x_valid. Each
// sample n is kept with probability (M - kept) / (N - n) (selection
// sampling), which keeps exactly M samples at uniformly random, distinct
// positions in ascending order. The random number comes from a 32-bit Galois
// LFSR (polynomial x^32 + x^22 + x^2 + x + 1) seeded at start: its upper 16
// bits r give floor(r * (N - n) / 2^16), an integer in [0, N - n).
// Kept samples form the measurement vector v(0..M-1) and their positions the
// vector P_v. The source only says that M of N samples are selected at random
// positions; the selection method and the generator are this design's choice.
// Read-out: NRD independent combinational read ports (address m gives v(m)
// and P_v(m)), so several later blocks can read without arbitration.
// Timing: done pulses in the cycle after the N-th sample is accepted.
// An assertion checks that exactly M samples were kept at done; it is disabled
// during reset, which is why rst_n is seen as both an asynchronous reset and a
// synchronous signal by lint. The assertion adds no logic to the circuit.
module rand_select
  import sira_pkg::*;
#(
  parameter int N   = 512,
  parameter int M   = 256,
  parameter int NRD = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [31:0]           seed,
  input  logic                  x_valid,
  input  sample_t               x_i,
  output logic                  busy,
  output logic                  done,
  input  logic [$clog2(M)-1:0]  rd_addr [NRD],
  output sample_t               v_o     [NRD],
  output logic [$clog2(N)-1:0]  pv_o    [NRD]
);
  localparam int NB = $clog2(N + 1);
  localparam int MB = $clog2(M + 1);

  sample_t              v_mem  [M];
  logic [$clog2(N)-1:0] pv_mem [M];

  logic [31:0]   lfsr;
  logic [NB-1:0] n_q;      // samples seen
  logic [MB-1:0] k_q;      // samples kept
  logic [NB-1:0] left;
  logic [MB-1:0] need;
  logic [NB+15:0] scaled;
  logic          take;

  assign left   = NB'(N) - n_q;
  assign need   = MB'(M) - k_q;
  assign scaled = (NB+16)'(lfsr[31:16]) * (NB+16)'(left);
  assign take   = (NB+1)'(scaled >> 16) < (NB+1)'(need);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 32'h1; n_q <= '0; k_q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        lfsr <= (seed == 32'd0) ? 32'hACE1_2468 : seed;
        n_q  <= '0;
        k_q  <= '0;
        busy <= 1'b1;
      end else if (busy && x_valid) begin
        lfsr <= lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
        n_q  <= n_q + 1'b1;
        if (take) k_q <= k_q + 1'b1;
        if (n_q == NB'(N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && x_valid && take) begin
      v_mem[k_q[$clog2(M)-1:0]]  <= x_i;
      pv_mem[k_q[$clog2(M)-1:0]] <= n_q[$clog2(N)-1:0];
    end
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign v_o[p]  = v_mem[rd_addr[p]];
    assign pv_o[p] = pv_mem[rd_addr[p]];
  end

  // exactly M samples must have been kept when the stream ends
  a_count: assert property (@(posedge clk) disable iff (!rst_n) done |-> k_q == MB'(M));
endmodule
