// tb_mwc_top: end-to-end test of mwc_top at reduced size (m = 24, L = M = 31,
// N = 3, N_CTF = N_MEM = 20); see mwc_top_bench for what is checked.
module tb_mwc_top;
  mwc_top_bench #(.FULL(1'b0)) bench ();
endmodule
