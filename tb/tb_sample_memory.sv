// tb_sample_memory: default size (100 channels, depth 50). Random vectors
// are written with random gaps; each output must equal the vector written
// exactly N_MEM accepted vectors earlier, the first N_MEM writes must give
// no valid output, and a flush must restart the fill count.
module tb_sample_memory;
  localparam int MC = 100, NM = 50;
  logic clk = 0, rst_n = 0, flush = 0, in_valid = 0, out_valid;
  logic [MC-1:0][15:0] in_vec, out_vec;
  logic [6:0] fill;
  int checks = 0, failures = 0;
  logic [MC-1:0][15:0] hist [$];
  always #1 clk = ~clk;
  sample_memory dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nw, nout;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    nw = 0; nout = 0;
    for (int t = 0; t < 600; t++) begin
      bit wr;
      if (t == 300) begin
        flush = 1; @(negedge clk); flush = 0; hist.delete(); nw = 0;
        checks++; if (fill != 0) begin failures++; $display("fill after flush %0d", fill); end
      end
      wr = ($urandom % 3) != 0;
      for (int i = 0; i < MC; i++) in_vec[i] = 16'($urandom);
      in_valid = wr;
      if (wr) begin hist.push_back(in_vec); nw++; end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (wr) begin
        if (nw <= NM) begin
          if (out_valid) begin failures++; $display("valid output too early"); end
        end else begin
          if (!out_valid || out_vec != hist[nw-1-NM]) begin failures++; $display("t=%0d wrong delayed vector", t); end
          nout++;
        end
      end else if (out_valid) begin failures++; $display("spurious valid"); end
    end
    checks++; if (nout < 100) begin failures++; $display("too few outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
