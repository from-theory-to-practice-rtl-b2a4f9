// tb_mwc_top_full: end-to-end test of mwc_top with every parameter at its
// default (m = 100, L = M = 195, N = 6, N_CTF = N_MEM = 50); see
// mwc_top_bench for what is checked.
module tb_mwc_top_full;
  mwc_top_bench #(.FULL(1'b1)) bench ();
endmodule
