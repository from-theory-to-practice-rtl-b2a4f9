// ctf_mmv_solver: support recovery of the CTF block (Fig. 5, right half).
//
// Finds the joint support S of the sparsest U solving V = A U, where A is the
// m x L sensing matrix (eq. (11)/(19)) and V is a frame of the measurements.
// As in the paper's experiments, the solver is simultaneous orthogonal
// matching pursuit (SOMP) that adds a symmetric pair of slices {l, L-1-l}
// per iteration (conjugate symmetry of X(f)), for N_BANDS iterations, so S
// holds at most 2N slices. The frame used is the matrix Q of eq. (28) itself
// (see ctf_frame_builder); the paper's eigenvalue thresholding of Q is not
// done.
//
// Algorithm, all in fixed point:
//  1. NORM/LOAD: the residual R (m x m, complex) is loaded with Q, shifted
//     right so that its largest entry (the largest diagonal entry of Q) fits
//     in 29 bits.
//  2. SCORE: for every unselected slice l, score(l) = sum_j |a_l^H r_j|^2.
//  3. PICK: the unselected pair maximising score(l) + score(L-1-l).
//  4. ORTHO: each new column a_l is orthogonalised against the basis kept so
//     far (modified Gram-Schmidt, unnormalised): u = a_l*2^BF - sum_k
//     R(k,new) b_k with R(k,new) = b_k^H u / |b_k|^2, kept with FB fraction
//     bits. u becomes basis vector b_new; |b_new|^2 and 2^IP/|b_new|^2 are
//     stored.
//  5. RESID: every residual column loses its projection on b_new.
//  After N_BANDS iterations one more column, the lowest-numbered slice not in
//  S, is orthogonalised last (no residual update). It is the slice the support
//  change detector watches: with this order, z of the watched slice under
//  A_{S+watch}^+ is simply b_watch^H y / |b_watch|^2.
//  The basis, the R coefficients and the inverse norms give A_S^+ y by one
//  projection per basis vector and a back-substitution (see dsp_recovery);
//  they are read through the f_* port.
//
// The matrix A is written by the host through the a_* port (the paper notes
// that the coefficients c_il can be computed or calibrated); any column
// scaling the host applies is a scaling of the recovered z.
//
// Timing: one multiply-accumulate per clock. SCORE takes L*m*m clocks per
// iteration; ORTHO and RESID take about 2m clocks plus 2*DIVW divider clocks
// per vector. done pulses when the support is ready; busy is high meanwhile.
// All fixed-point formats and the MAC schedule are this design's choices.
// The few variables declared inside the clocked process (bit-length search,
// pair selection) are combinational temporaries of that clock's step, not
// registers; a synthesis tool may note that they have no reset value.
module ctf_mmv_solver
  import mwc_pkg::cplx_a_t, mwc_pkg::cplx_r_t, mwc_pkg::RW, mwc_pkg::FB, mwc_pkg::BF,
         mwc_pkg::NBW, mwc_pkg::IP;
#(
  parameter int unsigned M_CH    = mwc_pkg::M_CH,
  parameter int unsigned L       = mwc_pkg::L_SLICE,
  parameter int unsigned N_BANDS = mwc_pkg::N_BANDS,
  parameter int unsigned QW      = 2*mwc_pkg::SW + 7,
  localparam int unsigned K_MAX = 2*N_BANDS + 1,
  localparam int unsigned CW  = (M_CH > 1) ? $clog2(M_CH) : 1,
  localparam int unsigned LW  = $clog2(L + 1),
  localparam int unsigned KW  = $clog2(K_MAX + 1),
  localparam int unsigned RCW = 48,       // width of an R coefficient part
  localparam int unsigned IW  = 80,       // width of an inverse norm
  localparam int unsigned DIVW = 100,     // divider numerator width
  localparam int unsigned SCW = 80,       // score width
  localparam int unsigned LC  = (L - 1) / 2  // centre slice L0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // sensing matrix write port
  input  logic                     a_we,
  input  logic [CW-1:0]            a_row,
  input  logic [LW-1:0]            a_col,
  input  cplx_a_t                  a_wdata,
  // control
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // frame (Q) read port
  output logic [CW-1:0]            q_row,
  output logic [CW-1:0]            q_col,
  input  logic signed [QW-1:0]     q_data,
  // result
  output logic [L-1:0]             supp_mask,
  output logic [KW-1:0]            supp_cnt,   // |S|; entry supp_cnt is the watched slice
  output logic [LW-1:0]            supp_idx [K_MAX],
  // factor read port for the DSP
  input  logic [KW-1:0]            f_k,
  input  logic [KW-1:0]            f_j,
  input  logic [CW-1:0]            f_i,
  output cplx_r_t                  f_basis,    // b_{f_k}[f_i]
  output logic signed [RCW-1:0]    f_r_re,     // R(f_k, f_j), fraction FB
  output logic signed [RCW-1:0]    f_r_im,
  output logic [IW-1:0]            f_invnb     // 2^IP / |b_{f_k}|^2
);

  typedef enum logic [4:0] {
    S_IDLE, S_NORM, S_LOAD, S_SCORE, S_PICK, S_NEXTCOL, S_OR_INIT, S_OR_DOT,
    S_OR_AXPY, S_OR_NORM, S_RS_DOT, S_RS_AXPY, S_DIV, S_DONE
  } state_t;
  state_t st, div_ret;

  // storage
  cplx_a_t a_mem [M_CH*L];
  cplx_r_t res   [M_CH*M_CH];
  cplx_r_t basis [K_MAX*M_CH];
  cplx_r_t u     [M_CH];
  logic [NBW-1:0] nb [K_MAX];
  logic [IW-1:0]  invnb [K_MAX];
  logic signed [RCW-1:0] rc_re [K_MAX*K_MAX];
  logic signed [RCW-1:0] rc_im [K_MAX*K_MAX];
  logic [SCW-1:0] score [L];

  // counters and work registers
  logic [CW-1:0] ci, cj;
  logic [LW-1:0] cl;
  logic [KW-1:0] ck, kc;            // basis loop index, basis count
  logic [3:0]    iter;
  logic [5:0]    shamt;
  logic [QW-1:0] qmax;
  logic signed [DIVW-1:0] acc_re, acc_im;
  logic [NBW-1:0] acc_nb;
  logic [LW-1:0] pend [2];
  logic [1:0]    npend, ppos;
  logic          watch_phase;
  logic [SCW:0]  best;
  logic [LW-1:0] best_l;
  logic          best_ok;
  logic signed [RCW-1:0] coef_re, coef_im;
  logic [1:0]    div_step;
  logic          div_inv;           // dividing 2^IP by a norm

  // divider
  logic div_start, div_done;
  logic signed [DIVW-1:0] div_num, div_q;
  logic [NBW-1:0] div_den;
  logic div_busy;
  seq_divider #(.NW(DIVW), .DW(NBW)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quot(div_q));

  // write port of A
  always_ff @(posedge clk) if (a_we) a_mem[int'(a_row) * L + int'(a_col)] <= a_wdata;

  // reads for the DSP
  assign f_basis = basis[int'(f_k) * M_CH + int'(f_i)];
  assign f_r_re  = rc_re[int'(f_k) * K_MAX + int'(f_j)];
  assign f_r_im  = rc_im[int'(f_k) * K_MAX + int'(f_j)];
  assign f_invnb = invnb[f_k];

  assign busy = (st != S_IDLE);

  // frame read address
  always_comb begin
    q_row = ci;
    q_col = (st == S_NORM) ? ci : cj;
  end

  // saturate a wide value to RW bits
  function automatic logic signed [RW-1:0] sat_rw(input logic signed [DIVW-1:0] v);
    if (v > DIVW'(2**(RW-1) - 1))       return {1'b0, {(RW-1){1'b1}}};
    else if (v < -DIVW'(2**(RW-1)))     return {1'b1, {(RW-1){1'b0}}};
    else                                return v[RW-1:0];
  endfunction
  function automatic logic signed [RCW-1:0] sat_rc(input logic signed [DIVW-1:0] v);
    if (v > DIVW'(2**(RCW-1) - 1))      return {1'b0, {(RCW-1){1'b1}}};
    else if (v < -DIVW'(2**(RCW-1)))    return {1'b1, {(RCW-1){1'b0}}};
    else                                return v[RCW-1:0];
  endfunction

  // current column a_l scaled to the basis format, as complex RW words
  logic [LW-1:0] col_l;
  assign col_l = pend[ppos[0]];

  // products used by the MAC loops (conj(x) * y)
  cplx_r_t       x_op, y_op;
  logic signed [DIVW-1:0] pr_re, pr_im;
  always_comb begin
    x_op = '0; y_op = '0;
    unique case (st)
      S_SCORE: begin
        x_op.re = RW'(a_mem[int'(ci) * L + int'(cl)].re);
        x_op.im = RW'(a_mem[int'(ci) * L + int'(cl)].im);
        y_op    = res[int'(ci) * M_CH + int'(cj)];
      end
      S_OR_DOT: begin
        x_op = basis[int'(ck) * M_CH + int'(ci)];
        y_op = u[ci];
      end
      S_RS_DOT: begin
        x_op = basis[int'(kc) * M_CH + int'(ci)];
        y_op = res[int'(ci) * M_CH + int'(cj)];
      end
      default: ;
    endcase
    // conj(x) * y = (xr yr + xi yi) + j (xr yi - xi yr)
    pr_re = DIVW'(x_op.re * y_op.re) + DIVW'(x_op.im * y_op.im);
    pr_im = DIVW'(x_op.re * y_op.im) - DIVW'(x_op.im * y_op.re);
  end

  // coef * b, used by the AXPY loops, shifted back by FB
  cplx_r_t b_op;
  logic signed [DIVW-1:0] cb_re, cb_im;
  always_comb begin
    b_op  = (st == S_OR_AXPY) ? basis[int'(ck) * M_CH + int'(ci)]
                              : basis[int'(kc) * M_CH + int'(ci)];
    cb_re = (DIVW'(coef_re * b_op.re) - DIVW'(coef_im * b_op.im)) >>> FB;
    cb_im = (DIVW'(coef_re * b_op.im) + DIVW'(coef_im * b_op.re)) >>> FB;
  end

  // squared magnitude of the finished correlation, shifted to keep width
  localparam int unsigned CSH = 24;
  logic signed [DIVW-1:0] cre_s, cim_s;
  logic [SCW-1:0] csq;
  always_comb begin
    cre_s = (acc_re + pr_re) >>> CSH;
    cim_s = (acc_im + pr_im) >>> CSH;
    csq   = SCW'($signed(cre_s[39:0]) * $signed(cre_s[39:0]))
          + SCW'($signed(cim_s[39:0]) * $signed(cim_s[39:0]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; div_ret <= S_IDLE; done <= 1'b0;
      ci <= '0; cj <= '0; cl <= '0; ck <= '0; kc <= '0; iter <= '0;
      shamt <= '0; qmax <= '0; acc_re <= '0; acc_im <= '0; acc_nb <= '0;
      npend <= '0; ppos <= '0; watch_phase <= 1'b0; best <= '0; best_l <= '0; best_ok <= 1'b0;
      coef_re <= '0; coef_im <= '0; div_step <= '0; div_inv <= 1'b0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
      supp_mask <= '0; supp_cnt <= '0;
      pend[0] <= '0; pend[1] <= '0;
      for (int k = 0; k < K_MAX; k++) supp_idx[k] <= '0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_NORM; ci <= '0; qmax <= '0;
          supp_mask <= '0; supp_cnt <= '0; kc <= '0; iter <= '0; watch_phase <= 1'b0;
        end
        // largest |Q_ij| is the largest diagonal entry
        S_NORM: begin
          if (q_data > $signed(qmax)) qmax <= q_data;
          if (ci == CW'(M_CH-1)) begin
            int unsigned bl;
            logic [QW-1:0] mx;
            mx = (q_data > $signed(qmax)) ? q_data : qmax;
            bl = 0;
            for (int b = 0; b < QW; b++) if (mx[b]) bl = b + 1;
            shamt <= (bl > 29) ? 6'(bl - 29) : '0;
            st <= S_LOAD; ci <= '0; cj <= '0;
          end else ci <= ci + 1'b1;
        end
        S_LOAD: begin
          res[int'(ci) * M_CH + int'(cj)].re <= RW'(q_data >>> shamt);
          res[int'(ci) * M_CH + int'(cj)].im <= '0;
          if (cj == CW'(M_CH-1)) begin
            cj <= '0;
            if (ci == CW'(M_CH-1)) begin
              ci <= '0; st <= S_SCORE; cl <= '0; acc_re <= '0; acc_im <= '0;
              for (int l = 0; l < L; l++) score[l] <= '0;
            end else ci <= ci + 1'b1;
          end else cj <= cj + 1'b1;
        end
        // loop order l, j, i: correlation of slice l with residual column j
        S_SCORE: begin
          if (supp_mask[cl]) begin
            score[cl] <= '0;
            ci <= '0; cj <= '0;
            if (cl == LW'(L-1)) begin st <= S_PICK; cl <= '0; best <= '0; best_l <= '0; best_ok <= 1'b0; end
            else cl <= cl + 1'b1;
          end else if (ci == CW'(M_CH-1)) begin
            score[cl] <= score[cl] + csq;
            acc_re <= '0; acc_im <= '0; ci <= '0;
            if (cj == CW'(M_CH-1)) begin
              cj <= '0;
              if (cl == LW'(L-1)) begin st <= S_PICK; cl <= '0; best <= '0; best_l <= '0; best_ok <= 1'b0; end
              else cl <= cl + 1'b1;
            end else cj <= cj + 1'b1;
          end else begin
            acc_re <= acc_re + pr_re;
            acc_im <= acc_im + pr_im;
            ci <= ci + 1'b1;
          end
        end
        // best unselected symmetric pair (first maximum wins); the pair
        // {l, L-1-l} is visited once, at l <= (L-1)/2
        S_PICK: begin
          logic [LW-1:0] ml, nl;
          logic [SCW:0]  ps, nbst;
          logic          take;
          ml   = LW'(L - 1) - cl;
          ps   = {1'b0, score[cl]} + ((ml != cl) ? {1'b0, score[ml]} : '0);
          take = !supp_mask[cl] && (!best_ok || ps > best);
          nbst = take ? ps : best;
          nl   = take ? cl : best_l;
          best <= nbst; best_l <= nl;
          if (take) best_ok <= 1'b1;
          if (cl == LW'(LC)) begin
            pend[0] <= nl;
            pend[1] <= LW'(L - 1) - nl;
            npend   <= (nl == LW'(LC)) ? 2'd1 : 2'd2;
            ppos    <= '0;
            st      <= S_NEXTCOL;
          end else cl <= cl + 1'b1;
        end
        // start orthogonalising the next pending column
        S_NEXTCOL: begin
          if (ppos == npend) begin
            iter <= iter + 1'b1;
            if (iter == 4'(N_BANDS - 1)) begin
              // watched slice: lowest index outside S
              logic [LW-1:0] w;
              w = '0;
              for (int l = L - 1; l >= 0; l--) if (!supp_mask[l]) w = LW'(l);
              pend[0] <= w; npend <= 2'd1; ppos <= '0; watch_phase <= 1'b1;
              st <= S_OR_INIT;
            end else begin
              st <= S_SCORE; cl <= '0; ci <= '0; cj <= '0; acc_re <= '0; acc_im <= '0;
            end
          end else st <= S_OR_INIT;
        end
        S_OR_INIT: begin
          // u = a_l * 2^BF
          for (int i = 0; i < M_CH; i++) begin
            u[i].re <= RW'($signed(a_mem[i * L + int'(col_l)].re)) <<< BF;
            u[i].im <= RW'($signed(a_mem[i * L + int'(col_l)].im)) <<< BF;
          end
          ck <= '0; ci <= '0; acc_re <= '0; acc_im <= '0;
          st <= (kc == '0) ? S_OR_NORM : S_OR_DOT;
          acc_nb <= '0;
        end
        S_OR_DOT: begin
          if (ci == CW'(M_CH-1)) begin
            div_num  <= (acc_re + pr_re) <<< FB;
            acc_im   <= acc_im + pr_im;
            div_den  <= nb[ck];
            div_start <= 1'b1; div_step <= '0; div_inv <= 1'b0;
            div_ret  <= S_OR_AXPY; st <= S_DIV; ci <= '0;
          end else begin
            acc_re <= acc_re + pr_re; acc_im <= acc_im + pr_im; ci <= ci + 1'b1;
          end
        end
        S_OR_AXPY: begin
          u[ci].re <= sat_rw(DIVW'(u[ci].re) - cb_re);
          u[ci].im <= sat_rw(DIVW'(u[ci].im) - cb_im);
          if (ci == CW'(M_CH-1)) begin
            rc_re[int'(ck) * K_MAX + int'(kc)] <= coef_re;
            rc_im[int'(ck) * K_MAX + int'(kc)] <= coef_im;
            ci <= '0; acc_re <= '0; acc_im <= '0;
            if (ck == kc - 1'b1) st <= S_OR_NORM;
            else begin ck <= ck + 1'b1; st <= S_OR_DOT; end
          end else ci <= ci + 1'b1;
        end
        // store u as basis vector kc and its squared norm
        S_OR_NORM: begin
          logic [NBW-1:0] sq;
          sq = NBW'(u[ci].re * u[ci].re) + NBW'(u[ci].im * u[ci].im);
          basis[int'(kc) * M_CH + int'(ci)] <= u[ci];
          if (ci == CW'(M_CH-1)) begin
            nb[kc]   <= acc_nb + sq;
            div_num  <= DIVW'(1) <<< IP;
            div_den  <= acc_nb + sq;
            div_start <= 1'b1; div_inv <= 1'b1; div_step <= '0;
            rc_re[int'(kc) * K_MAX + int'(kc)] <= RCW'(1) <<< FB;
            rc_im[int'(kc) * K_MAX + int'(kc)] <= '0;
            supp_idx[kc] <= col_l;
            if (!watch_phase) supp_mask[col_l] <= 1'b1;
            ci <= '0; cj <= '0; acc_re <= '0; acc_im <= '0;
            div_ret <= watch_phase ? S_DONE : S_RS_DOT;
            st <= S_DIV;
          end else begin
            acc_nb <= acc_nb + sq; ci <= ci + 1'b1;
          end
        end
        // project residual column cj on the new basis vector kc
        S_RS_DOT: begin
          if (ci == CW'(M_CH-1)) begin
            div_num  <= (acc_re + pr_re) <<< FB;
            acc_im   <= acc_im + pr_im;
            div_den  <= nb[kc];
            div_start <= 1'b1; div_step <= '0; div_inv <= 1'b0;
            div_ret  <= S_RS_AXPY; st <= S_DIV; ci <= '0;
          end else begin
            acc_re <= acc_re + pr_re; acc_im <= acc_im + pr_im; ci <= ci + 1'b1;
          end
        end
        S_RS_AXPY: begin
          res[int'(ci) * M_CH + int'(cj)].re <= sat_rw(DIVW'(res[int'(ci) * M_CH + int'(cj)].re) - cb_re);
          res[int'(ci) * M_CH + int'(cj)].im <= sat_rw(DIVW'(res[int'(ci) * M_CH + int'(cj)].im) - cb_im);
          if (ci == CW'(M_CH-1)) begin
            ci <= '0; acc_re <= '0; acc_im <= '0;
            if (cj == CW'(M_CH-1)) begin
              cj <= '0; kc <= kc + 1'b1; ppos <= ppos + 1'b1; st <= S_NEXTCOL;
            end else begin cj <= cj + 1'b1; st <= S_RS_DOT; end
          end else ci <= ci + 1'b1;
        end
        // divider sequencing: real part, then imaginary part (or one inverse)
        S_DIV: begin
          if (div_done) begin
            if (div_inv) begin
              invnb[kc] <= IW'(div_q);
              if (watch_phase) begin supp_cnt <= kc; end
              else supp_cnt <= kc + 1'b1;
              if (div_ret == S_RS_DOT) begin st <= S_RS_DOT; end
              else st <= S_DONE;
            end else if (div_step == 2'd0) begin
              coef_re  <= sat_rc(div_q);
              div_num  <= acc_im <<< FB;
              div_start <= 1'b1; div_step <= 2'd1;
            end else begin
              coef_im <= sat_rc(div_q);
              st <= div_ret;
            end
          end
        end
        S_DONE: begin
          done <= 1'b1; st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
