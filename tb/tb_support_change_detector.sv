// tb_support_change_detector: drives random runs of quiet and loud z values
// and checks the trigger against a reference count: a trigger exactly in the
// clock after every CONSEC-th consecutive value above the threshold, none
// otherwise, none while disabled.
module tb_support_change_detector;
  import mwc_pkg::*;
  logic clk = 0, rst_n = 0, enable = 0, z_valid = 0, trigger;
  cplx_z_t z_watch;
  logic [64:0] thresh;
  logic [2:0] run_len;
  int checks = 0, failures = 0, triggers = 0;
  always #1 clk = ~clk;
  support_change_detector dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int run;
    thresh = 65'd1000000;      // |z| above 1000
    z_watch = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    run = 0;
    for (int t = 0; t < 2000; t++) begin
      bit loud, en, exp_trig;
      en   = (t % 500) > 20;
      loud = ($urandom % 5) != 0;
      z_watch.re = loud ? 32'(700 + $urandom % 800) : 32'($urandom % 500);
      z_watch.im = loud ? -32'(700 + $urandom % 800) : 32'($urandom % 500);
      z_valid = ($urandom % 4) != 0;
      enable = en;
      // reference
      exp_trig = 0;
      if (!en) run = 0;
      else if (z_valid) begin
        longint m2;
        m2 = longint'(z_watch.re) * z_watch.re + longint'(z_watch.im) * z_watch.im;
        if (m2 > 1000000) begin
          if (run == 3) begin exp_trig = 1; run = 0; end else run++;
        end else run = 0;
      end
      @(negedge clk);
      checks++;
      if (trigger != exp_trig) begin failures++; $display("t=%0d trigger %b expected %b", t, trigger, exp_trig); end
      if (trigger) triggers++;
    end
    checks++;
    if (triggers == 0) begin failures++; $display("never triggered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
