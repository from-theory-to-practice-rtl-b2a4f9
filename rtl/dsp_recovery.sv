// dsp_recovery: the DSP of the recovery architecture, eq. (29).
//
// For every sample vector y[n] it produces the low-rate slice sequences
// z_S[n] = A_S^+ y[n] of the slices in the current support S, plus z of one
// watched slice outside S, used by the support change detector.
//
// The pseudo-inverse is applied through the Gram-Schmidt factors left by
// ctf_mmv_solver: A_S * 2^BF = B R with B = [b_0 .. b_{K-1}] orthogonal and R
// unit upper triangular. Then
//   beta_k = b_k^H y / |b_k|^2           (one projection per basis vector)
//   z_k    = beta_k - sum_{j>k} R(k,j) z_j   (back-substitution, k = K-1..0)
// which equals A_S^+ y. The watched slice was orthogonalised last, so its z
// under A_{S+watch}^+ is its beta alone. Outputs are in the units of A as
// written to the solver, with ZO fraction bits.
//
// The DSP keeps its own copy of the factors, so it goes on using the old
// support while the solver computes a new one (the paper's reason for the
// sample memory). A load pulse copies the factors through the f_* port, one
// word per clock; the copy takes about (K+1)*(m + K + 2) clocks.
//
// Slices can be switched off with slice_en (the controller's band selection):
// their outputs read zero and their z_act bit is low.
//
// Timing: a vector is accepted when in_valid and in_ready are both high. It
// takes (K+1)*(m+1) + K*(K-1)/2 + 2 clocks, one complex MAC per clock; then
// out_valid pulses with z_val/z_idx/z_act for entries 0..z_cnt-1 and z_watch.
// The schedule and number formats are this design's choices.
module dsp_recovery
  import mwc_pkg::cplx_r_t, mwc_pkg::cplx_z_t, mwc_pkg::RW, mwc_pkg::ZW, mwc_pkg::ZO,
         mwc_pkg::FB, mwc_pkg::BF, mwc_pkg::IP;
#(
  parameter int unsigned M_CH    = mwc_pkg::M_CH,
  parameter int unsigned L       = mwc_pkg::L_SLICE,
  parameter int unsigned N_BANDS = mwc_pkg::N_BANDS,
  parameter int unsigned SW      = mwc_pkg::SW,
  localparam int unsigned K_MAX = 2*N_BANDS + 1,
  localparam int unsigned CW  = (M_CH > 1) ? $clog2(M_CH) : 1,
  localparam int unsigned LW  = $clog2(L + 1),
  localparam int unsigned KW  = $clog2(K_MAX + 1),
  localparam int unsigned RCW = 48,
  localparam int unsigned IW  = 80,
  localparam int unsigned AW  = 72   // accumulator width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // factor copy from the solver
  input  logic                     load,
  output logic                     loading,
  input  logic [KW-1:0]            s_cnt,
  input  logic [LW-1:0]            s_idx [K_MAX],
  output logic [KW-1:0]            f_k,
  output logic [KW-1:0]            f_j,
  output logic [CW-1:0]            f_i,
  input  cplx_r_t                  f_basis,
  input  logic signed [RCW-1:0]    f_r_re,
  input  logic signed [RCW-1:0]    f_r_im,
  input  logic [IW-1:0]            f_invnb,
  // band selection
  input  logic [L-1:0]             slice_en,
  // sample stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [M_CH-1:0][SW-1:0]  in_vec,
  // outputs
  output logic                     out_valid,
  output logic [KW-1:0]            z_cnt,
  output logic [LW-1:0]            z_idx [K_MAX],
  output cplx_z_t                  z_val [K_MAX],
  output logic [K_MAX-1:0]         z_act,
  output logic [LW-1:0]            watch_idx,
  output cplx_z_t                  z_watch
);

  typedef enum logic [2:0] {D_IDLE, D_CPB, D_CPR, D_CPI, D_DOT, D_SCALE, D_BACK, D_OUT} dstate_t;
  dstate_t st;

  cplx_r_t basis [K_MAX*M_CH];
  logic signed [RCW-1:0] r_re [K_MAX*K_MAX];
  logic signed [RCW-1:0] r_im [K_MAX*K_MAX];
  logic [IW-1:0] inv [K_MAX];
  logic [KW-1:0] cnt;
  logic [LW-1:0] idx [K_MAX];
  logic [M_CH-1:0][SW-1:0] yv;
  cplx_z_t z [K_MAX];
  logic signed [AW-1:0] acc_re, acc_im;
  logic [KW-1:0] k, j;
  logic [CW-1:0] i;
  logic [KW-1:0] ck;
  logic [CW-1:0] ci;
  logic [KW-1:0] cj;

  assign in_ready = (st == D_IDLE) && !load;
  assign loading  = (st == D_CPB) || (st == D_CPR) || (st == D_CPI);
  assign f_k = ck;
  assign f_j = cj;
  assign f_i = ci;

  function automatic logic signed [ZW-1:0] sat_z(input logic signed [159:0] v);
    if (v > 160'sd2147483647)       return 32'sh7fffffff;
    else if (v < -160'sd2147483648) return 32'sh80000000;
    else                            return v[ZW-1:0];
  endfunction

  // products
  cplx_r_t bq;
  logic signed [AW-1:0] pr_re, pr_im;
  always_comb begin
    bq = basis[int'(k) * M_CH + int'(i)];
    // conj(b) * y, y real
    pr_re =  AW'(bq.re * $signed(yv[i]));
    pr_im = -AW'(bq.im * $signed(yv[i]));
  end
  logic signed [RCW-1:0] rq_re, rq_im;
  logic signed [AW-1:0]  rz_re, rz_im;
  always_comb begin
    rq_re = r_re[int'(k) * K_MAX + int'(j)];
    rq_im = r_im[int'(k) * K_MAX + int'(j)];
    rz_re = AW'(rq_re * z[j].re) - AW'(rq_im * z[j].im);
    rz_im = AW'(rq_re * z[j].im) + AW'(rq_im * z[j].re);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; cnt <= '0; k <= '0; j <= '0; i <= '0;
      ck <= '0; ci <= '0; cj <= '0; acc_re <= '0; acc_im <= '0;
      out_valid <= 1'b0; yv <= '0;
      for (int q = 0; q < K_MAX; q++) begin idx[q] <= '0; z[q] <= '0; end
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        D_IDLE: begin
          if (load) begin
            cnt <= s_cnt;
            for (int q = 0; q < K_MAX; q++) idx[q] <= s_idx[q];
            ck <= '0; ci <= '0; cj <= '0; st <= D_CPB;
          end else if (in_valid) begin
            yv <= in_vec; k <= '0; i <= '0; acc_re <= '0; acc_im <= '0; st <= D_DOT;
          end
        end
        // copy basis k (entries 0..cnt, the last one is the watched slice)
        D_CPB: begin
          basis[int'(ck) * M_CH + int'(ci)] <= f_basis;
          if (ci == CW'(M_CH-1)) begin ci <= '0; cj <= '0; st <= D_CPR; end
          else ci <= ci + 1'b1;
        end
        D_CPR: begin
          r_re[int'(ck) * K_MAX + int'(cj)] <= f_r_re;
          r_im[int'(ck) * K_MAX + int'(cj)] <= f_r_im;
          if (cj == KW'(K_MAX-1)) st <= D_CPI;
          else cj <= cj + 1'b1;
        end
        D_CPI: begin
          inv[ck] <= f_invnb;
          if (ck == cnt) st <= D_IDLE;
          else begin ck <= ck + 1'b1; ci <= '0; st <= D_CPB; end
        end
        // beta_k = b_k^H y, then scaled by the inverse norm
        D_DOT: begin
          acc_re <= acc_re + pr_re;
          acc_im <= acc_im + pr_im;
          if (i == CW'(M_CH-1)) begin i <= '0; st <= D_SCALE; end
          else i <= i + 1'b1;
        end
        D_SCALE: begin
          z[k].re <= sat_z((160'(acc_re) * $signed({1'b0, inv[k]})) >>> (IP - BF - ZO));
          z[k].im <= sat_z((160'(acc_im) * $signed({1'b0, inv[k]})) >>> (IP - BF - ZO));
          acc_re <= '0; acc_im <= '0;
          if (k == cnt) begin
            if (cnt <= KW'(1)) st <= D_OUT;
            else begin k <= cnt - KW'(2); j <= cnt - KW'(1); st <= D_BACK; end
          end else begin k <= k + 1'b1; st <= D_DOT; end
        end
        // back-substitution over the support entries 0..cnt-1
        D_BACK: begin
          if (j == k + 1'b1) begin
            z[k].re <= sat_z(160'(z[k].re) - ((160'(acc_re) + 160'(rz_re)) >>> FB));
            z[k].im <= sat_z(160'(z[k].im) - ((160'(acc_im) + 160'(rz_im)) >>> FB));
            acc_re <= '0; acc_im <= '0;
            if (k == '0) st <= D_OUT;
            else begin k <= k - 1'b1; j <= cnt - 1'b1; end
          end else begin
            acc_re <= acc_re + rz_re;
            acc_im <= acc_im + rz_im;
            j <= j - 1'b1;
          end
        end
        D_OUT: begin
          out_valid <= 1'b1;
          st <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  // output view
  always_comb begin
    z_cnt = cnt;
    for (int q = 0; q < K_MAX; q++) begin
      z_idx[q] = idx[q];
      z_act[q] = (KW'(q) < cnt) && slice_en[idx[q]];
      z_val[q] = z_act[q] ? z[q] : '0;
    end
    watch_idx = idx[cnt];
    z_watch   = z[cnt];
  end

endmodule
