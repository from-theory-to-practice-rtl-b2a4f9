// tb_sign_waveform_gen: checks the mixing-waveform shift registers.
//
// Two instances: the default one (100 channels, 195 intervals, one register
// per channel) and one with register sharing (SHARE_R = 40, shift 5). Random
// sign patterns are loaded, then for three full periods every output bit is
// compared with alpha of its channel at the current interval, where a shared
// channel i uses alpha_{i mod r, (k - 5*(i div r)) mod M}. The period of
// period_start (M clocks) is checked too.
module tb_sign_waveform_gen;
  localparam int unsigned MC = 100, ML = 195, RS = 40;
  logic clk = 0, rst_n = 0, load = 0, run = 0;
  logic [6:0] load_ch;
  logic [ML-1:0] load_pattern;
  logic [MC-1:0] p_a, p_b;
  logic [7:0] ph_a, ph_b;
  logic ps_a, ps_b;
  int checks = 0, failures = 0;
  logic [ML-1:0] alpha [MC];

  always #1 clk = ~clk;

  sign_waveform_gen dut_a (.clk, .rst_n, .load, .load_ch, .load_pattern, .run,
                           .p(p_a), .phase(ph_a), .period_start(ps_a));
  sign_waveform_gen #(.SHARE_R(RS)) dut_b (.clk, .rst_n, .load, .load_ch, .load_pattern, .run,
                           .p(p_b), .phase(ph_b), .period_start(ps_b));

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int last_ps;
    for (int i = 0; i < MC; i++)
      for (int k = 0; k < ML; k++) alpha[i][k] = 1'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < MC; i++) begin
      load = 1; load_ch = 7'(i); load_pattern = alpha[i];
      @(negedge clk);
    end
    load = 0; run = 1;
    last_ps = -1;
    for (int t = 0; t < 3*ML; t++) begin
      int k;
      k = t % ML;
      checks++;
      if (ph_a != 8'(k) || ph_b != 8'(k)) begin
        failures++; if (failures < 10) $display("phase %0d expected %0d", ph_a, k);
      end
      for (int i = 0; i < MC; i++) begin
        int c, g, kk;
        checks++;
        if (p_a[i] != alpha[i][k]) begin
          failures++; if (failures < 10) $display("t=%0d ch %0d: p=%b alpha=%b", t, i, p_a[i], alpha[i][k]);
        end
        c = i % RS; g = i / RS; kk = ((k - 5*g) % int'(ML) + int'(ML)) % int'(ML);
        checks++;
        if (p_b[i] != alpha[c][kk]) begin
          failures++; if (failures < 10) $display("shared t=%0d ch %0d wrong", t, i);
        end
      end
      if (ps_a) begin
        if (last_ps >= 0) begin
          checks++;
          if (t - last_ps != ML) begin failures++; $display("period %0d", t - last_ps); end
        end
        last_ps = t;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
