// sira_ctrl: sequencer of the reconstruction engine.
//
// Starts the blocks in the order of the three parts of the architecture and
// waits for each done pulse:
//   Part 1: random selection and threshold (in parallel), then FFT, then the
//           comparator;
//   Part 2: column selection, row selection, Hermitian transpose, then
//           A_P = A_CS* A_CS and X_P = A_CS* v (in parallel);
//   Part 3: inversion of A_P, X_TP = A_P^-1 X_P, spectral positioning.
// The threshold may finish before or after the random selection; the FFT
// needs the measurement vector, the comparator needs both. done_o pulses when
// spectral positioning has finished. The source does not describe control;
// this sequencing is this design's choice.
module sira_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic rnd_done, thr_done, fft_done, cmp_done, col_done, row_done,
  input  logic trn_done, mulp_done, mulx_done, inv_done, mult_done, spc_done,
  output logic rnd_start, thr_start, fft_start, cmp_start, col_start, row_start,
  output logic trn_start, mulp_start, mulx_start, inv_start, mult_start, spc_start,
  output logic busy,
  output logic done_o
);
  typedef enum logic [3:0] {
    C_IDLE, C_P1, C_FFT, C_CMP, C_COL, C_ROW, C_TRN, C_MUL, C_INV, C_MULT, C_SPC
  } cstate_t;
  cstate_t st;
  logic thr_seen, fft_seen, mp_seen, mx_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; busy <= 1'b0; done_o <= 1'b0;
      {thr_seen, fft_seen, mp_seen, mx_seen} <= '0;
      {rnd_start, thr_start, fft_start, cmp_start, col_start, row_start} <= '0;
      {trn_start, mulp_start, mulx_start, inv_start, mult_start, spc_start} <= '0;
    end else begin
      {rnd_start, thr_start, fft_start, cmp_start, col_start, row_start} <= '0;
      {trn_start, mulp_start, mulx_start, inv_start, mult_start, spc_start} <= '0;
      done_o <= 1'b0;
      if (thr_done) thr_seen <= 1'b1;
      case (st)
        C_IDLE: if (start) begin
          rnd_start <= 1'b1; thr_start <= 1'b1; busy <= 1'b1;
          {thr_seen, fft_seen, mp_seen, mx_seen} <= '0;
          st <= C_P1;
        end
        C_P1: if (rnd_done) begin fft_start <= 1'b1; st <= C_FFT; end
        C_FFT: begin
          if (fft_done) fft_seen <= 1'b1;
          if ((fft_seen || fft_done) && (thr_seen || thr_done)) begin
            cmp_start <= 1'b1; st <= C_CMP;
          end
        end
        C_CMP:  if (cmp_done) begin col_start <= 1'b1; st <= C_COL; end
        C_COL:  if (col_done) begin row_start <= 1'b1; st <= C_ROW; end
        C_ROW:  if (row_done) begin trn_start <= 1'b1; st <= C_TRN; end
        C_TRN:  if (trn_done) begin
          mulp_start <= 1'b1; mulx_start <= 1'b1; mp_seen <= 1'b0; mx_seen <= 1'b0; st <= C_MUL;
        end
        C_MUL: begin
          if (mulp_done) mp_seen <= 1'b1;
          if (mulx_done) mx_seen <= 1'b1;
          if ((mp_seen || mulp_done) && (mx_seen || mulx_done) && !mulp_start) begin
            inv_start <= 1'b1; st <= C_INV;
          end
        end
        C_INV:  if (inv_done)  begin mult_start <= 1'b1; st <= C_MULT; end
        C_MULT: if (mult_done) begin spc_start  <= 1'b1; st <= C_SPC; end
        C_SPC:  if (spc_done)  begin busy <= 1'b0; done_o <= 1'b1; st <= C_IDLE; end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
