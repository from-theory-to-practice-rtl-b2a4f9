// tb_dsp_recovery: checks z_S[n] = A_S^+ y[n] at the default size
// (m = 100, L = 195, N = 6, |S| = 12).
//
// The testbench builds its own Gram-Schmidt factors of A_S (classical
// Gram-Schmidt in floating point, then quantised to the solver's formats:
// basis = a*2^8 projected, R with 16 fraction bits, inverse norms 2^96/|b|^2)
// and serves them on the factor port. The watched slice is orthogonalised
// last. It then feeds sample vectors y = A z with z on the support and checks
// each recovered z against the drawn one (relative error below 1 %), that the
// watched output stays near zero, and that it becomes large when the watched
// slice carries energy (a real input on it: the
// mirror slice also gets the conjugate). Also checked: disabled slices read zero, and the
// latency per vector equals (K+1)(m+1) + K(K-1)/2 + 2 clocks.
module tb_dsp_recovery;
  import mwc_pkg::*;
  import mwc_model_pkg::*;
  localparam int MC = 100, NL = 195, NB = 6, K = 2*NB + 1;
  logic clk = 0, rst_n = 0, load = 0, loading;
  logic [3:0] s_cnt; logic [7:0] s_idx [K];
  logic [3:0] f_k, f_j; logic [6:0] f_i;
  cplx_r_t f_basis; logic signed [47:0] f_r_re, f_r_im; logic [79:0] f_invnb;
  logic [NL-1:0] slice_en;
  logic in_valid = 0, in_ready; logic [MC-1:0][15:0] in_vec;
  logic out_valid; logic [3:0] z_cnt; logic [7:0] z_idx [K]; cplx_z_t z_val [K];
  logic [K-1:0] z_act; logic [7:0] watch_idx; cplx_z_t z_watch;
  int checks = 0, failures = 0;
  real bre [K*MC], bim [K*MC], rre [K*K], rim [K*K], nrm [K];
  int are[], aim[];
  bit alpha[];

  always #1 clk = ~clk;
  dsp_recovery dut (.*);

  assign f_basis.re = 32'($rtoi(bre[int'(f_k)*MC + int'(f_i)]));
  assign f_basis.im = 32'($rtoi(bim[int'(f_k)*MC + int'(f_i)]));
  assign f_r_re = 48'($rtoi(rre[int'(f_k)*K + int'(f_j)] * 65536.0));
  assign f_r_im = 48'($rtoi(rim[int'(f_k)*K + int'(f_j)] * 65536.0));
  assign f_invnb = 80'($rtoi(2.0**96 / nrm[f_k] / 2.0**40)) << 40;

  initial begin
    #4000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    int sidx [K];
    int pairs [NB];
    logic [NL-1:0] used;
    int cnt;
    make_sensing(MC, NL, are, aim, alpha);
    // support: 6 random pairs, stored as l, mirror, ... then the watched slice
    used = '0; cnt = 0;
    for (int q = 0; q < NB; q++) begin
      int p;
      do p = $urandom % ((NL-1)/2); while (used[p]);
      used[p] = 1; used[NL-1-p] = 1; pairs[q] = p;
      sidx[cnt++] = p; sidx[cnt++] = NL-1-p;
    end
    sidx[cnt] = 0; while (used[sidx[cnt]]) sidx[cnt]++;
    // classical Gram-Schmidt on a*2^8
    for (int k = 0; k < K; k++) begin
      real ur [MC], ui [MC];
      for (int i = 0; i < MC; i++) begin ur[i] = are[i*NL+sidx[k]]*256.0; ui[i] = aim[i*NL+sidx[k]]*256.0; end
      for (int j = 0; j < k; j++) begin
        real dr, di;
        dr = 0; di = 0;
        for (int i = 0; i < MC; i++) begin
          dr += bre[j*MC+i]*ur[i] + bim[j*MC+i]*ui[i];
          di += bre[j*MC+i]*ui[i] - bim[j*MC+i]*ur[i];
        end
        rre[j*K+k] = dr / nrm[j]; rim[j*K+k] = di / nrm[j];
        for (int i = 0; i < MC; i++) begin
          ur[i] -= rre[j*K+k]*bre[j*MC+i] - rim[j*K+k]*bim[j*MC+i];
          ui[i] -= rre[j*K+k]*bim[j*MC+i] + rim[j*K+k]*bre[j*MC+i];
        end
      end
      nrm[k] = 0;
      for (int i = 0; i < MC; i++) begin
        bre[k*MC+i] = $rtoi(ur[i]); bim[k*MC+i] = $rtoi(ui[i]);
        nrm[k] += bre[k*MC+i]**2 + bim[k*MC+i]**2;
      end
      rre[k*K+k] = 1.0; rim[k*K+k] = 0.0;
      for (int j = k+1; j < K; j++) begin rre[j*K+k] = 0; rim[j*K+k] = 0; end
    end
    slice_en = '1;
    s_cnt = 4'(2*NB);
    for (int k = 0; k < K; k++) s_idx[k] = 8'(sidx[k]);
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    load = 1; @(negedge clk); load = 0;
    @(negedge clk); while (loading) @(negedge clk);
    for (int t = 0; t < 8; t++) begin
      real zr [K], zi [K];
      real scl;
      int y [MC];
      int lat;
      bit watch_on;
      watch_on = (t >= 6);
      for (int q = 0; q < NB; q++) begin
        zr[2*q] = ($urandom % 2001) / 1000.0 - 1.0; zi[2*q] = ($urandom % 2001) / 1000.0 - 1.0;
        zr[2*q+1] = zr[2*q]; zi[2*q+1] = -zi[2*q];
      end
      zr[K-1] = watch_on ? 2.0 : 0.0; zi[K-1] = 0.0;
      // y = A z, rounded; scale so that samples stay within 16 bits
      scl = 8.0;
      for (int i = 0; i < MC; i++) begin
        real acc;
        acc = 0;
        for (int k = 0; k < K; k++) acc += are[i*NL+sidx[k]]*zr[k] - aim[i*NL+sidx[k]]*zi[k];
        y[i] = $rtoi(acc / scl);
        in_vec[i] = 16'(y[i]);
      end
      if (t == 5) slice_en[sidx[3]] = 1'b0; else slice_en = '1;
      in_valid = 1; @(negedge clk); in_valid = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      check(lat == (K)*(MC+1) + (K-1)*(K-2)/2 + 2, $sformatf("latency %0d", lat));
      check(z_cnt == 4'(2*NB) && watch_idx == 8'(sidx[K-1]), "count / watched index");
      if (!watch_on) begin
        for (int k = 0; k < K-1; k++) begin
          real er, ei, gr, gi;
          er = zr[k] / scl; ei = zi[k] / scl;
          gr = real'(z_val[k].re) / 65536.0; gi = real'(z_val[k].im) / 65536.0;
          check(z_idx[k] == 8'(sidx[k]), "slice index");
          if (t == 5 && k == 3) check(!z_act[k] && z_val[k] == '0, "disabled slice reads zero");
          else check(z_act[k] && ((gr-er)**2 + (gi-ei)**2) < 1e-4 * (er*er + ei*ei + 1e-6) + 1e-6,
                     $sformatf("t=%0d z[%0d] = %f,%f expected %f,%f", t, k, gr, gi, er, ei));
        end
        check(fabs(real'(z_watch.re)) < 0.002 * 65536.0 && fabs(real'(z_watch.im)) < 0.002 * 65536.0,
              $sformatf("watched slice not quiet: %0d", z_watch.re));
      end else begin
        // a real signal on the watched slice also puts its conjugate on the
        // mirror slice, so only a clear rise above the quiet level is checked
        check(fabs(real'(z_watch.re)) + fabs(real'(z_watch.im)) > 0.04 * 65536.0,
              $sformatf("watched z %f", real'(z_watch.re)/65536.0));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
