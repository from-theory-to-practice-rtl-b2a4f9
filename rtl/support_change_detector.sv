// support_change_detector: notices that the spectral support has changed.
//
// Following the paper's simple technique, the DSP recovers, besides the
// slices of the current support S, one slice i outside S. While S is right,
// z_i[n] holds only noise. When |z_i[n]|^2 exceeds the threshold for CONSEC
// consecutive sample vectors, a one-clock trigger asks the controller to run
// the CTF again. Values are compared at full resolution here, although the
// paper notes that a coarse one would do.
//
// Interface: z_valid marks a new z_i value; enable gates the detector (the
// controller keeps it low until a support exists). thresh is the squared
// magnitude threshold in the units of z squared. The count restarts whenever
// a value is below the threshold or enable is low. trigger is registered: it
// rises in the clock after the CONSEC-th value above threshold.
// CONSEC = 4 and the squared-magnitude test are this design's choices; the
// paper says only "for certain number of consecutive time instances".
module support_change_detector
  import mwc_pkg::cplx_z_t, mwc_pkg::ZW;
#(
  parameter int unsigned CONSEC = 4,
  localparam int unsigned NW = $clog2(CONSEC + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              z_valid,
  input  cplx_z_t           z_watch,
  input  logic [2*ZW:0]     thresh,
  output logic              trigger,
  output logic [NW-1:0]     run_len
);

  logic [2*ZW:0] mag2;
  always_comb mag2 = (2*ZW+1)'(z_watch.re * z_watch.re) + (2*ZW+1)'(z_watch.im * z_watch.im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_len <= '0;
      trigger <= 1'b0;
    end else begin
      trigger <= 1'b0;
      if (!enable) run_len <= '0;
      else if (z_valid) begin
        if (mag2 > thresh) begin
          if (run_len == NW'(CONSEC - 1)) begin
            trigger <= 1'b1;
            run_len <= '0;
          end else run_len <= run_len + 1'b1;
        end else run_len <= '0;
      end
    end
  end

endmodule
