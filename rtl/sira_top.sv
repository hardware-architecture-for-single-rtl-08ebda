// sira_top: single-iteration compressive-sensing reconstruction engine.
//
// From N streamed signal samples the engine keeps M at random positions,
// computes their initial DFT, detects the frequencies whose DFT magnitude
// exceeds the statistical threshold T, and solves the least-squares problem
// X = (A_CS* A_CS)^-1 A_CS* v for the amplitudes at those frequencies. The
// result is the N-point spectrum of the reconstructed signal.
// Structure (blocks named after the architecture):
//   Part 1  rand_select (Block 1), fft_r2 (Block 2), threshold_compare
//           (Block 3), threshold_calc (Block 4)
//   Part 2  column_select (Block 5), row_select (Block 6), herm_transpose
//           (Block 7), cmat_mul for A_P and X_P, cmem registers
//   Part 3  cmat_inv, cmat_mul for X_TP, spectral_position
//   sira_ctrl sequences them.
// Operation: pulse start with seed, p_i and the threshold inputs stable, then
// stream the N samples (x_valid while x_ready) and the K component amplitudes
// (amp_valid while amp_ready, amp_last on the final one) in any interleaving. done pulses once
// the spectrum can be read through x_rd_addr / x_rd_data. T, Cr, K, the
// overflow and singular flags, and the measurement vector (v_rd_addr) stay
// readable until the next start. The N and M fed to the threshold unit are
// the parameters N and M (M taken here as the number of kept samples).
module sira_top
  import sira_pkg::*;
#(
  parameter int N    = 512,
  parameter int M    = 256,
  parameter int KMAX = 32,
  parameter int LAW  = 12,
  parameter int TW   = 40
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [31:0]               seed,
  input  logic [31:0]               p_i,
  input  logic                      x_valid,
  input  sample_t                   x_i,
  output logic                      x_ready,
  input  logic                      amp_valid,
  input  logic [15:0]               amp_i,
  input  logic                      amp_last,
  output logic                      amp_ready,
  output logic                      busy,
  output logic                      done,
  output logic [TW-1:0]             t_o,
  output logic [N-1:0]              cr_o,
  output logic [$clog2(KMAX+1)-1:0] k_o,
  output logic                      overflow_o,
  output logic                      singular_o,
  input  logic [$clog2(M)-1:0]      v_rd_addr,
  output sample_t                   v_rd_data,
  output logic [$clog2(N)-1:0]      pv_rd_data,
  input  logic [$clog2(N)-1:0]      x_rd_addr,
  output mat_t                      x_rd_data
);
  localparam int LN  = $clog2(N);
  localparam int LM  = $clog2(M);
  localparam int ACW = $clog2(M * KMAX);
  localparam int APW = $clog2(KMAX * KMAX);
  localparam int KW  = $clog2(KMAX);

  logic rnd_start, thr_start, fft_start, cmp_start, col_start, row_start;
  logic trn_start, mulp_start, mulx_start, inv_start, mult_start, spc_start;
  logic rnd_done, thr_done, fft_done, cmp_done, col_done, row_done;
  logic trn_done, mulp_done, mulx_done, inv_done, mult_done, spc_done;
  logic rnd_busy, thr_busy, fft_busy, cmp_busy, col_busy, row_busy;
  logic trn_busy, mulp_busy, mulx_busy, inv_busy, mult_busy, spc_busy;

  sira_ctrl u_ctrl (
    .clk, .rst_n, .start,
    .rnd_done, .thr_done, .fft_done, .cmp_done, .col_done, .row_done,
    .trn_done, .mulp_done, .mulx_done, .inv_done, .mult_done, .spc_done,
    .rnd_start, .thr_start, .fft_start, .cmp_start, .col_start, .row_start,
    .trn_start, .mulp_start, .mulx_start, .inv_start, .mult_start, .spc_start,
    .busy, .done_o(done)
  );

  // ---------------- Part 1 ----------------
  logic [LM-1:0] rs_addr [4];
  sample_t       rs_v    [4];
  logic [LN-1:0] rs_pv   [4];

  rand_select #(.N(N), .M(M), .NRD(4)) u_rand (
    .clk, .rst_n, .start(rnd_start), .seed, .x_valid, .x_i,
    .busy(rnd_busy), .done(rnd_done),
    .rd_addr(rs_addr), .v_o(rs_v), .pv_o(rs_pv)
  );
  assign x_ready    = rnd_busy;
  assign rs_addr[3] = v_rd_addr;
  assign v_rd_data  = rs_v[3];
  assign pv_rd_data = rs_pv[3];

  logic [LN-1:0] v_addr;
  spec_t         v_f;
  fft_r2 #(.N(N), .M(M)) u_fft (
    .clk, .rst_n, .start(fft_start), .busy(fft_busy), .done(fft_done),
    .ld_addr(rs_addr[0]), .ld_v(rs_v[0]), .ld_pos(rs_pv[0]),
    .rd_addr(v_addr), .rd_v(v_f)
  );

  threshold_calc #(.LAW(LAW), .TW(TW)) u_thr (
    .clk, .rst_n, .start(thr_start),
    .n_len(16'(N)), .m_cnt(16'(M)), .p_i,
    .amp_valid, .amp_i, .amp_last, .amp_ready,
    .t_o, .busy(thr_busy), .done(thr_done)
  );

  logic [$clog2(N+1)-1:0] ones;
  threshold_compare #(.N(N), .TW(TW)) u_cmp (
    .clk, .rst_n, .start(cmp_start), .t_i(t_o),
    .v_addr, .v_i(v_f), .cr_o, .ones_o(ones),
    .busy(cmp_busy), .done(cmp_done)
  );

  // ---------------- Part 2 ----------------
  logic [LN-1:0] pos [KMAX];
  column_select #(.N(N), .KMAX(KMAX)) u_col (
    .clk, .rst_n, .start(col_start), .cr_i(cr_o),
    .pos_o(pos), .k_o, .overflow_o, .busy(col_busy), .done(col_done)
  );

  logic            acs_we;
  logic [ACW-1:0]  acs_wa;
  mat_t            acs_wd;
  logic [ACW-1:0]  acs_ra [2];
  mat_t            acs_rd [2];
  row_select #(.N(N), .M(M), .KMAX(KMAX)) u_row (
    .clk, .rst_n, .start(row_start), .k_i(k_o), .pos_i(pos),
    .pv_addr(rs_addr[1]), .pv_i(rs_pv[1]),
    .we(acs_we), .waddr(acs_wa), .wdata(acs_wd),
    .busy(row_busy), .done(row_done)
  );
  cmem #(.DEPTH(M * KMAX), .NRD(2)) u_acs (
    .clk, .we(acs_we), .waddr(acs_wa), .wdata(acs_wd), .raddr(acs_ra), .rdata(acs_rd)
  );

  logic            ach_we;
  logic [ACW-1:0]  ach_wa;
  mat_t            ach_wd;
  logic [ACW-1:0]  ach_ra [2];
  mat_t            ach_rd [2];
  herm_transpose #(.M(M), .KMAX(KMAX)) u_trn (
    .clk, .rst_n, .start(trn_start), .k_i(k_o),
    .raddr(acs_ra[0]), .rdata(acs_rd[0]),
    .we(ach_we), .waddr(ach_wa), .wdata(ach_wd),
    .busy(trn_busy), .done(trn_done)
  );
  cmem #(.DEPTH(KMAX * M), .NRD(2)) u_acsh (
    .clk, .we(ach_we), .waddr(ach_wa), .wdata(ach_wd), .raddr(ach_ra), .rdata(ach_rd)
  );

  // A_P = A_CS* A_CS
  logic            ap_we;
  logic [APW-1:0]  ap_wa;
  mat_t            ap_wd;
  logic [APW-1:0]  ap_ra [1];
  mat_t            ap_rd [1];
  cmat_mul #(.AW(ACW), .BW(ACW), .CW(APW), .A_STRIDE(M), .B_STRIDE(KMAX), .C_STRIDE(KMAX)) u_mulp (
    .clk, .rst_n, .start(mulp_start),
    .n_rows(16'(k_o)), .n_inner(16'(M)), .n_cols(16'(k_o)),
    .a_addr(ach_ra[0]), .a_data(ach_rd[0]), .b_addr(acs_ra[1]), .b_data(acs_rd[1]),
    .c_we(ap_we), .c_addr(ap_wa), .c_data(ap_wd), .busy(mulp_busy), .done(mulp_done)
  );
  cmem #(.DEPTH(KMAX * KMAX), .NRD(1)) u_ap (
    .clk, .we(ap_we), .waddr(ap_wa), .wdata(ap_wd), .raddr(ap_ra), .rdata(ap_rd)
  );

  // X_P = A_CS* v
  logic            xp_we;
  logic [KW-1:0]   xp_wa;
  mat_t            xp_wd;
  logic [KW-1:0]   xp_ra [1];
  mat_t            xp_rd [1];
  cmat_mul #(.AW(ACW), .BW(LM), .CW(KW), .A_STRIDE(M), .B_STRIDE(1), .C_STRIDE(1)) u_mulx (
    .clk, .rst_n, .start(mulx_start),
    .n_rows(16'(k_o)), .n_inner(16'(M)), .n_cols(16'd1),
    .a_addr(ach_ra[1]), .a_data(ach_rd[1]), .b_addr(rs_addr[2]), .b_data(sample_to_mat(rs_v[2])),
    .c_we(xp_we), .c_addr(xp_wa), .c_data(xp_wd), .busy(mulx_busy), .done(mulx_done)
  );
  cmem #(.DEPTH(KMAX), .NRD(1)) u_xp (
    .clk, .we(xp_we), .waddr(xp_wa), .wdata(xp_wd), .raddr(xp_ra), .rdata(xp_rd)
  );

  // ---------------- Part 3 ----------------
  logic [APW-1:0] inv_ra;
  mat_t           inv_rd;
  cmat_inv #(.KMAX(KMAX)) u_inv (
    .clk, .rst_n, .start(inv_start), .k_i(k_o),
    .a_addr(ap_ra[0]), .a_data(ap_rd[0]),
    .rd_addr(inv_ra), .rd_data(inv_rd),
    .singular_o, .busy(inv_busy), .done(inv_done)
  );

  // X_TP = A_P^-1 X_P
  logic            xt_we;
  logic [KW-1:0]   xt_wa;
  mat_t            xt_wd;
  logic [KW-1:0]   xt_ra [1];
  mat_t            xt_rd [1];
  cmat_mul #(.AW(APW), .BW(KW), .CW(KW), .A_STRIDE(KMAX), .B_STRIDE(1), .C_STRIDE(1)) u_mult (
    .clk, .rst_n, .start(mult_start),
    .n_rows(16'(k_o)), .n_inner(16'(k_o)), .n_cols(16'd1),
    .a_addr(inv_ra), .a_data(inv_rd), .b_addr(xp_ra[0]), .b_data(xp_rd[0]),
    .c_we(xt_we), .c_addr(xt_wa), .c_data(xt_wd), .busy(mult_busy), .done(mult_done)
  );
  cmem #(.DEPTH(KMAX), .NRD(1)) u_xtp (
    .clk, .we(xt_we), .waddr(xt_wa), .wdata(xt_wd), .raddr(xt_ra), .rdata(xt_rd)
  );

  spectral_position #(.N(N), .KMAX(KMAX)) u_spc (
    .clk, .rst_n, .start(spc_start), .cr_i(cr_o), .k_i(k_o),
    .x_addr(xt_ra[0]), .x_data(xt_rd[0]),
    .rd_addr(x_rd_addr), .rd_data(x_rd_data),
    .busy(spc_busy), .done(spc_done)
  );
endmodule
