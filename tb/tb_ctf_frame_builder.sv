// tb_ctf_frame_builder: default size (m = 100, N_CTF = 50). Feeds 50 random
// 16-bit sample vectors, with idle gaps, and checks every entry of
// Q = sum y y^T against a reference sum, the done pulse, and the time per
// vector (m*m clocks of MAC). A second frame checks that start clears Q.
module tb_ctf_frame_builder;
  localparam int MC = 100, NC = 50;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_ready, busy, done;
  logic [MC-1:0][15:0] in_vec;
  logic [6:0] rd_row, rd_col;
  logic signed [38:0] rd_data;
  int checks = 0, failures = 0;
  longint qref [MC*MC];
  always #1 clk = ~clk;
  ctf_frame_builder dut (.*);

  initial begin
    #3000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int frame = 0; frame < 2; frame++) begin
      foreach (qref[x]) qref[x] = 0;
      start = 1; @(negedge clk); start = 0;
      for (int n = 0; n < NC; n++) begin
        int t0;
        while (!in_ready) @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
        for (int i = 0; i < MC; i++) in_vec[i] = 16'($urandom);
        for (int i = 0; i < MC; i++)
          for (int j = 0; j < MC; j++)
            qref[i*MC+j] += longint'($signed(in_vec[i])) * longint'($signed(in_vec[j]));
        in_valid = 1; @(negedge clk); in_valid = 0;
        t0 = 0;
        while (!in_ready && !done && busy) begin @(negedge clk); t0++; end
        checks++;
        if (t0 != MC*MC - (n == NC-1 ? 1 : 0) && !(n == NC-1 && t0 == MC*MC)) begin
          failures++; $display("vector %0d took %0d clocks", n, t0);
        end
      end
      checks++; if (busy) begin failures++; $display("still busy"); end
      for (int i = 0; i < MC; i++)
        for (int j = 0; j < MC; j++) begin
          rd_row = 7'(i); rd_col = 7'(j); #1;
          checks++;
          if (longint'(rd_data) != qref[i*MC+j]) begin
            failures++; if (failures < 10) $display("Q[%0d][%0d] = %0d expected %0d", i, j, rd_data, qref[i*MC+j]);
          end
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
