// tb_ctf_mmv_solver: support recovery from a frame of sparse multiband data.
//
// Reduced size (m = 24 channels, L = 31 slices, N = 3 bands) to keep the run
// short. For each of four trials the testbench draws N random symmetric slice
// pairs, makes 20 sample vectors y[n] = A z[n] with the reference model,
// forms Q = sum y y^T itself and serves it on the solver's frame port. Checks:
// the recovered support equals the drawn one, |S| = 2N, the watched slice is
// the lowest slice outside S, and the Gram-Schmidt factors reproduce the
// columns of A: a_s * 2^BF = b_k + sum_{j<k} R(j,k) b_j (to 0.5 %), and the
// inverse norms equal 2^96/|b_k|^2 (to 0.1 %).
module tb_ctf_mmv_solver;
  import mwc_pkg::*;
  import mwc_model_pkg::*;
  localparam int MC = 24, NL = 31, NB = 3, NS = 20, K = 2*NB + 1;
  logic clk = 0, rst_n = 0;
  logic a_we = 0; logic [4:0] a_row; logic [4:0] a_col; cplx_a_t a_wdata;
  logic start = 0, busy, done;
  logic [4:0] q_row, q_col; logic signed [38:0] q_data;
  logic [NL-1:0] supp_mask; logic [3:0] supp_cnt; logic [4:0] supp_idx [K];
  logic [3:0] f_k = 0, f_j = 0; logic [4:0] f_i = 0;
  cplx_r_t f_basis; logic signed [47:0] f_r_re, f_r_im; logic [79:0] f_invnb;
  int checks = 0, failures = 0;
  longint qm [MC*MC];

  always #1 clk = ~clk;
  assign q_data = 39'(qm[int'(q_row)*MC + int'(q_col)]);

  ctf_mmv_solver #(.M_CH(MC), .L(NL), .N_BANDS(NB)) dut (.*);

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int are[], aim[], y[], pairs[];
    bit alpha[];
    real zre[], zim[], ysc;
    make_sensing(MC, NL, are, aim, alpha);
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < MC; i++)
      for (int p = 0; p < NL; p++) begin
        a_we = 1; a_row = 5'(i); a_col = 5'(p);
        a_wdata.re = 16'(are[i*NL+p]); a_wdata.im = 16'(aim[i*NL+p]);
        @(negedge clk);
      end
    a_we = 0;
    for (int trial = 0; trial < 4; trial++) begin
      logic [NL-1:0] exp_mask;
      int wexp;
      // distinct pairs; the centre slice is allowed
      pairs = new[NB];
      exp_mask = '0;
      for (int q = 0; q < NB; q++) begin
        int p;
        do p = $urandom % ((NL+1)/2); while (exp_mask[p]);
        pairs[q] = p; exp_mask[p] = 1'b1; exp_mask[NL-1-p] = 1'b1;
      end
      make_samples(MC, NL, NS, are, aim, pairs, y, zre, zim, ysc);
      foreach (qm[x]) qm[x] = 0;
      for (int n = 0; n < NS; n++)
        for (int i = 0; i < MC; i++)
          for (int j = 0; j < MC; j++) qm[i*MC+j] += longint'(y[n*MC+i]) * y[n*MC+j];
      start = 1; @(negedge clk); start = 0;
      wait (done); @(negedge clk);
      check(supp_mask == exp_mask, $sformatf("trial %0d support %b expected %b", trial, supp_mask, exp_mask));
      check(supp_cnt == 4'(2*NB - (exp_mask[(NL-1)/2] ? 1 : 0)), $sformatf("support count %0d", supp_cnt));
      wexp = 0; while (exp_mask[wexp]) wexp++;
      check(supp_idx[supp_cnt] == 5'(wexp), $sformatf("watched slice %0d expected %0d", supp_idx[supp_cnt], wexp));
      // factor check
      for (int k = 0; k <= supp_cnt; k++) begin
        real err, ref_n, nb;
        int s;
        s = supp_idx[k];
        err = 0; ref_n = 0; nb = 0;
        for (int i = 0; i < MC; i++) begin
          real rre, rim;
          f_i = 5'(i); f_k = 4'(k); #1;
          rre = f_basis.re; rim = f_basis.im;
          nb += rre*rre + rim*rim;
          for (int j = 0; j < k; j++) begin
            real cre, cim, bre, bim;
            f_k = 4'(j); f_j = 4'(k); #1;
            cre = real'(f_r_re) / 65536.0; cim = real'(f_r_im) / 65536.0;
            bre = f_basis.re; bim = f_basis.im;
            rre += cre*bre - cim*bim; rim += cre*bim + cim*bre;
          end
          err += (rre - are[i*NL+s]*256.0)**2 + (rim - aim[i*NL+s]*256.0)**2;
          ref_n += (are[i*NL+s]*256.0)**2 + (aim[i*NL+s]*256.0)**2;
        end
        check(err <= 2.5e-5 * ref_n, $sformatf("trial %0d basis %0d: residual %g of %g", trial, k, err, ref_n));
        f_k = 4'(k); #1;
        check(fabs(real'(f_invnb) * nb / (2.0**96) - 1.0) < 1e-3, $sformatf("inverse norm %0d", k));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
