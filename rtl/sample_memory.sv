// sample_memory: the sample-vector memory of the recovery architecture.
//
// The paper places a small memory between the sampling stage and the DSP so
// that, when the spectral support changes, the DSP can keep producing valid
// outputs while the CTF computes the new support. Here it is a circular
// buffer of N_MEM sample vectors that delays the stream by N_MEM samples: for
// every accepted vector y[n] it outputs y[n - N_MEM]. The first N_MEM outputs
// after reset or flush are not valid (out_valid stays low for them).
//
// Timing: when in_valid is high, the oldest entry is read and the new vector
// written in the same clock; out_vec/out_valid are registered and appear one
// clock later. fill reports how many valid entries the buffer holds.
// Depth N_MEM = N_CTF = 50 follows the paper's advice N_MEM >= N_CTF
// (Sec. V-D); the circular-buffer structure is this design's choice.
module sample_memory #(
  parameter int unsigned M_CH  = mwc_pkg::M_CH,
  parameter int unsigned N_MEM = mwc_pkg::N_MEM,
  parameter int unsigned SW    = mwc_pkg::SW,
  localparam int unsigned PW = (N_MEM > 1) ? $clog2(N_MEM) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      flush,
  input  logic                      in_valid,
  input  logic [M_CH-1:0][SW-1:0]   in_vec,
  output logic                      out_valid,
  output logic [M_CH-1:0][SW-1:0]   out_vec,
  output logic [PW:0]               fill
);

  logic [M_CH-1:0][SW-1:0] mem [N_MEM];
  logic [PW-1:0] wp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      fill      <= '0;
      out_valid <= 1'b0;
    end else if (flush) begin
      wp        <= '0;
      fill      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (fill == (PW+1)'(N_MEM));
      if (in_valid) begin
        wp <= (wp == PW'(N_MEM-1)) ? '0 : wp + PW'(1);
        if (fill != (PW+1)'(N_MEM)) fill <= fill + 1'b1;
      end
    end
  end

  // storage has no reset; entries are only read once written (fill)
  always_ff @(posedge clk) begin
    if (in_valid && !flush) begin
      out_vec <= mem[wp];
      mem[wp] <= in_vec;
    end
  end

endmodule
