// sign_waveform_gen: the periodic +-1 mixing waveforms p_i(t) of the MWC.
//
// Each waveform is piecewise constant over M equal intervals of one period Tp
// and repeats every Tp (eq. (4)). As the paper proposes, it is produced by a
// circular shift register of M flip-flops, loaded with the sign pattern
// alpha_i0..alpha_i,M-1 and clocked at M/Tp (10 GHz in the design example).
// Output bit p[i] is 1 for +1 and 0 for -1.
//
// Register sharing (paper Sec. V-B): only the first SHARE_R channels own a
// register. Channel i >= SHARE_R uses the pattern of channel i-SHARE_R
// cyclically shifted right by SHARE_SHIFT intervals, taken from a different
// tap of the same register. With SHARE_R = M_CH (default) every channel has
// its own register, as in the paper's main design example.
//
// Interface: while load is high, load_pattern is written into the register of
// channel load_ch (bit k = alpha_k, 1 meaning +1) and the phase restarts at
// k = 0 for every channel. While run is high the registers rotate by one
// interval per clock. phase gives the interval index k that p currently
// shows; period_start is high in the clock where k = 0.
// The load port and the reset to all +1 patterns are this design's choices;
// the paper only says the register is initialised with the pattern.
module sign_waveform_gen #(
  parameter int unsigned M_CH        = mwc_pkg::M_CH,
  parameter int unsigned M_LEN       = mwc_pkg::M_LEN,
  parameter int unsigned SHARE_R     = M_CH,
  parameter int unsigned SHARE_SHIFT = 5,
  localparam int unsigned CW = (M_CH  > 1) ? $clog2(M_CH)  : 1,
  localparam int unsigned KW = (M_LEN > 1) ? $clog2(M_LEN) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [CW-1:0]    load_ch,
  input  logic [M_LEN-1:0] load_pattern,
  input  logic             run,
  output logic [M_CH-1:0]  p,
  output logic [KW-1:0]    phase,
  output logic             period_start
);

  logic [M_LEN-1:0] sr [SHARE_R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < SHARE_R; c++) sr[c] <= '1;
      phase <= '0;
    end else if (load) begin
      for (int c = 0; c < SHARE_R; c++)
        if (load_ch == CW'(c)) sr[c] <= load_pattern;
      phase <= '0;
    end else if (run) begin
      // rotate: the bit showing interval k+1 moves to tap 0
      for (int c = 0; c < SHARE_R; c++) sr[c] <= {sr[c][0], sr[c][M_LEN-1:1]};
      phase <= (phase == KW'(M_LEN-1)) ? '0 : phase + KW'(1);
    end
  end

  // tap j of register c shows alpha_c,(k+j) mod M; a right shift by s is
  // the tap (M - s) mod M. Channel i = g*SHARE_R + c is shifted g*SHARE_SHIFT.
  always_comb begin
    for (int i = 0; i < M_CH; i++) begin
      int unsigned c, g, tap;
      c   = i % SHARE_R;
      g   = i / SHARE_R;
      tap = (M_LEN - ((g * SHARE_SHIFT) % M_LEN)) % M_LEN;
      p[i] = sr[c][tap];
    end
  end

  assign period_start = (phase == '0);

  initial begin
    assert (SHARE_R >= 1 && SHARE_R <= M_CH) else $error("SHARE_R out of range");
  end

endmodule
