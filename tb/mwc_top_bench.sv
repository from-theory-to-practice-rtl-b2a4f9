// mwc_top_bench: end-to-end bench of mwc_top, shared by tb_mwc_top (reduced
// size) and tb_mwc_top_full (all defaults).
//
// The bench plays the host, the analog front end and the application:
//  1. draws random sign patterns, loads them into the sign generators and
//     checks p_out for one period against them;
//  2. computes the matching sensing matrix A = S F D (mwc_model_pkg) and
//     writes it;
//  3. streams sample vectors y[n] = A z[n] of a multiband input whose slice
//     support is drawn at random, one vector every GAP clocks, and switches
//     to a new random support some samples after the first CTF run ends
//     (time-varying support); the application asks for one more run after
//     the second;
//  4. checks every support the CTF produces against the true one and every
//     recovered z of an active slice against the drawn z (2 % error), for
//     vectors whose support the DSP already knows.
// Mechanisms that must each occur at least once, counted: CTF run at
// start-up; support change detected by the detector; CTF run on application
// request; DSP vector dropped while copying factors; slice disabled by band
// selection; carrier override.
module mwc_top_bench #(
  parameter bit FULL = 1'b0
);
  import mwc_pkg::*;
  import mwc_model_pkg::*;
  localparam int MC  = FULL ? mwc_pkg::M_CH    : 24;
  localparam int NL  = FULL ? mwc_pkg::L_SLICE : 31;
  localparam int NB  = FULL ? mwc_pkg::N_BANDS : 3;
  localparam int NCT = FULL ? mwc_pkg::N_CTF   : 20;
  localparam int NM  = FULL ? mwc_pkg::N_MEM   : 20;
  localparam int K   = 2*NB + 1;
  localparam int CWt = $clog2(MC), LWt = $clog2(NL+1), KWt = $clog2(K+1), PWt = $clog2(NL);
  localparam int GAP = MC*MC + 64;
  // at most NSAMP samples of each support are prepared
  localparam int NSAMP    = FULL ? 4500 : 800;
  // the support changes SETTLE samples after the first CTF run ends, the
  // application requests a run SETTLE samples after the second ends, and the
  // stream stops SETTLE samples after the third ends
  localparam int SETTLE   = 2*NM + 10;

  logic clk = 0, clk_chip = 0, rst_n = 0;
  logic sg_load = 0, sg_run = 0; logic [CWt-1:0] sg_load_ch; logic [NL-1:0] sg_load_pattern;
  logic [MC-1:0] p_out; logic [PWt-1:0] sg_phase; logic sg_period_start;
  logic a_we = 0; logic [CWt-1:0] a_row; logic [LWt-1:0] a_col; cplx_a_t a_wdata;
  logic enable = 0, ctf_request = 0; logic [2*ZW:0] det_thresh;
  logic [NL-1:0] slice_en; logic [K-1:0] carrier_override;
  logic y_valid = 0; logic [MC-1:0][SW-1:0] y_in;
  logic z_valid; logic [KWt-1:0] z_cnt; logic [LWt-1:0] z_idx [K]; cplx_z_t z_val [K];
  logic [K-1:0] z_act; logic [LWt-1:0] carrier_idx [K]; logic [NL-1:0] supp_mask;
  logic support_valid, ctf_busy; logic [15:0] ctf_runs, det_triggers, dsp_drops;

  always #1 clk = ~clk;
  always #1 clk_chip = ~clk_chip;

  logic dsp_loading_w;
  if (FULL) begin : g_full
    mwc_top dut (.*);
    assign dsp_loading_w = dut.dsp_loading;
  end else begin : g_small
    mwc_top #(.M_CH(MC), .M_LEN(NL), .L(NL), .N_BANDS(NB), .N_CTF(NCT), .N_MEM(NM)) dut (.*);
    assign dsp_loading_w = dut.dsp_loading;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #(2*GAP*(NSAMP + 200) + 400000000); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // data of the two supports
  int are[], aim[];
  bit alpha[];
  int y1[], y2[], pr1[], pr2[];
  real z1r[], z1i[], z2r[], z2i[], sc1, sc2;
  logic [NL-1:0] mask1, mask2;

  function automatic void draw_pairs(ref int pr[], output logic [NL-1:0] mask);
    pr = new[NB]; mask = '0;
    for (int q = 0; q < NB; q++) begin
      int p;
      do p = $urandom % ((NL-1)/2); while (mask[p]);
      pr[q] = p; mask[p] = 1; mask[NL-1-p] = 1;
    end
  endfunction

  int n_init_runs = 0, n_detect = 0, n_request = 0, n_drop = 0, n_disabled = 0, n_override = 0;
  int n_zchecked = 0;

  // check outputs: vector index of each DSP output is tracked by the sender
  int out_sample [$];
  int T_CHANGE, T_REQ, T_END;
  bit was_loading;

  initial begin
    int runs_seen;
    make_sensing(MC, NL, are, aim, alpha);
    draw_pairs(pr1, mask1);
    do draw_pairs(pr2, mask2); while ((mask1 & mask2) != '0);
    make_samples(MC, NL, NSAMP, are, aim, pr1, y1, z1r, z1i, sc1);
    make_samples(MC, NL, NSAMP, are, aim, pr2, y2, z2r, z2i, sc2);
    det_thresh = (2*ZW+1)'(64'd1) << 24;   // |z| above 2^12 = 1/16 in Q16
    slice_en = '1; carrier_override = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // 1. sign patterns
    for (int i = 0; i < MC; i++) begin
      sg_load = 1; sg_load_ch = CWt'(i);
      for (int k = 0; k < NL; k++) sg_load_pattern[k] = alpha[i*NL + k];
      @(negedge clk);
    end
    sg_load = 0; sg_run = 1;
    for (int k = 0; k < NL; k++) begin
      bit ok;
      ok = (sg_phase == PWt'(k));
      for (int i = 0; i < MC; i++) ok &= (p_out[i] == alpha[i*NL + k]);
      check(ok, $sformatf("sign waveforms at interval %0d", k));
      @(negedge clk);
    end
    // 2. sensing matrix
    for (int i = 0; i < MC; i++)
      for (int p = 0; p < NL; p++) begin
        a_we = 1; a_row = CWt'(i); a_col = LWt'(p);
        a_wdata.re = 16'(are[i*NL+p]); a_wdata.im = 16'(aim[i*NL+p]);
        @(negedge clk);
      end
    a_we = 0;
    enable = 1;
    runs_seen = 0;
    // 3. stream
    T_CHANGE = 1 << 30; T_REQ = 1 << 30; T_END = 1 << 30;
    was_loading = 0;
    for (int n = 0; n < NSAMP && n < T_END; n++) begin
      int g;
      for (int i = 0; i < MC; i++) y_in[i] = SW'(n < T_CHANGE ? y1[n*MC+i] : y2[(n-T_CHANGE)*MC+i]);
      if (n == T_REQ) ctf_request = 1;
      // band selection and carrier override on a few samples
      slice_en = '1; carrier_override = '0;
      if (n % 50 == 49) slice_en[z_idx[0]] = 1'b0;
      if (n % 50 == 48) carrier_override[0] = 1'b1;
      y_valid = 1; @(negedge clk); y_valid = 0; ctf_request = 0;
      if (n >= NM) out_sample.push_back(n - NM);
      g = 1;
      while (g < GAP) begin
        if (z_valid) begin
          int s;
          s = out_sample.size() > 0 ? out_sample[$] : -1;
          out_sample.delete();
          // band selection / override observed
          if (!slice_en[z_idx[0]] && z_cnt > 0) begin
            n_disabled++; check(!z_act[0] && z_val[0] == '0, "disabled slice not silent");
          end
          if (carrier_override[0]) begin
            n_override++; check(carrier_idx[0] == LWt'((NL-1)/2), "carrier override");
          end else check(carrier_idx[0] == z_idx[0], "carrier index");
          // values, when the DSP support is the true one of that sample
          if (s >= 0) begin
            logic [NL-1:0] dmask;
            bit ok_s;
            dmask = '0;
            for (int k = 0; k < K-1; k++) if (KWt'(k) < z_cnt) dmask[z_idx[k]] = 1;
            ok_s = (s < T_CHANGE) ? (dmask == mask1) : (dmask == mask2);
            if (ok_s) for (int k = 0; k < K-1; k++) if (z_act[k]) begin
              real er, ei, gr, gi, sc;
              int p;
              p = z_idx[k];
              if (s < T_CHANGE) begin er = z1r[s*NL+p]; ei = z1i[s*NL+p]; sc = sc1; end
              else begin er = z2r[(s-T_CHANGE)*NL+p]; ei = z2i[(s-T_CHANGE)*NL+p]; sc = sc2; end
              er *= sc; ei *= sc;
              gr = real'(z_val[k].re) / 65536.0; gi = real'(z_val[k].im) / 65536.0;
              check((gr-er)**2 + (gi-ei)**2 <= 4e-4 * (er*er + ei*ei) + 1e-4,
                    $sformatf("sample %0d slice %0d: z = %f,%f expected %f,%f", s, p, gr, gi, er, ei));
              n_zchecked++;
            end
          end
        end
        if (dsp_loading_w && !was_loading) begin
          // next sample right away: the DSP cannot take it while copying
          g = GAP;
        end
        was_loading = dsp_loading_w;
        if (ctf_runs != 16'(runs_seen)) begin
          runs_seen = int'(ctf_runs);
                check(supp_mask == ((runs_seen == 1) ? mask1 : mask2),
                $sformatf("run %0d at sample %0d: support %b", runs_seen, n, supp_mask));
          if (runs_seen == 1) begin n_init_runs++; T_CHANGE = n + SETTLE; end
          if (runs_seen == 2) T_REQ = n + SETTLE;
          if (runs_seen == 3) T_END = n + SETTLE;
          $display("CTF run %0d finished at sample %0d, support %s", runs_seen, n,
                   (supp_mask == mask1) ? "1" : (supp_mask == mask2) ? "2" : "wrong");
        end
        @(negedge clk); g++;
      end
    end
    n_detect  = int'(det_triggers);
    n_request = (ctf_runs >= 3) ? 1 : 0;
    n_drop    = int'(dsp_drops);
    $display("events: init=%0d detect=%0d request=%0d drop=%0d disabled=%0d override=%0d z_checked=%0d runs=%0d",
             n_init_runs, n_detect, n_request, n_drop, n_disabled, n_override, n_zchecked, ctf_runs);
    check(n_init_runs > 0, "no start-up CTF run");
    check(n_detect > 0, "support change never detected");
    check(n_request > 0, "application request never served");
    check(n_drop > 0, "no DSP drop while loading");
    check(n_disabled > 0, "band selection never exercised");
    check(n_override > 0, "carrier override never exercised");
    check(n_zchecked > 10, "too few recovered values checked");
    check(supp_mask == mask2, "final support");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
