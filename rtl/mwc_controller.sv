// mwc_controller: the controller of the recovery architecture (Fig. 6).
//
// It runs the CTF when recovery is enabled (initialisation), when the support
// change detector fires, or when the application layer asks for it. A CTF run
// is: start the frame builder and let it take N_CTF live sample vectors,
// start the solver, then have the DSP copy the new factors. The DSP keeps
// working with the previous support during the whole run, fed from the
// sample memory. The detector is enabled only while a support exists and no
// run is in progress.
//
// It also applies the application's carrier override: for output entry k,
// carrier_idx[k] is the slice of that entry (the modulation frequency
// (idx - L0) fp the analog back-end uses, eq. (32)), or the centre slice L0,
// i.e. no shift, which leaves the band at baseband, when carrier_override[k] is set.
//
// Timing: the frame builder and solver starts are one-clock pulses; dsp_load
// is held until the DSP reports loading; a request that arrives during a run
// is remembered and served when the run ends. ctf_runs counts finished runs.
// The state machine is this design's own; the paper gives only the
// controller's duties.
module mwc_controller #(
  parameter int unsigned L     = mwc_pkg::L_SLICE,
  parameter int unsigned K_MAX = 2*mwc_pkg::N_BANDS + 1,
  localparam int unsigned LW = $clog2(L + 1),
  localparam int unsigned LC = (L - 1) / 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,
  input  logic            ctf_request,
  input  logic            det_trigger,
  // frame builder / solver / DSP handshakes
  output logic            fb_start,
  input  logic            fb_done,
  output logic            solver_start,
  input  logic            solver_done,
  output logic            dsp_load,
  input  logic            dsp_loading,
  output logic            fb_take,        // frame builder may take live samples
  // status
  output logic            det_enable,
  output logic            support_valid,
  output logic            ctf_busy,
  output logic [15:0]     ctf_runs,
  // carriers to the analog back-end
  input  logic [LW-1:0]   z_idx [K_MAX],
  input  logic [K_MAX-1:0] carrier_override,
  output logic [LW-1:0]   carrier_idx [K_MAX]
);

  typedef enum logic [2:0] {C_OFF, C_FRAME, C_SOLVE, C_LOAD, C_LOADW, C_RUN} cstate_t;
  cstate_t st;
  logic pending;

  assign fb_take    = (st == C_FRAME);
  assign dsp_load   = (st == C_LOAD);
  assign ctf_busy   = (st != C_OFF) && (st != C_RUN);
  assign det_enable = (st == C_RUN) && support_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_OFF; pending <= 1'b0; support_valid <= 1'b0; ctf_runs <= '0;
      fb_start <= 1'b0; solver_start <= 1'b0;
    end else begin
      fb_start <= 1'b0; solver_start <= 1'b0;
      if ((ctf_request || det_trigger) && st != C_RUN && st != C_OFF) pending <= 1'b1;
      unique case (st)
        C_OFF: if (enable) begin st <= C_FRAME; fb_start <= 1'b1; end
        C_FRAME: if (fb_done) begin st <= C_SOLVE; solver_start <= 1'b1; end
        C_SOLVE: if (solver_done) st <= C_LOAD;
        // the DSP takes the load request when it has finished its vector
        C_LOAD: if (dsp_loading) st <= C_LOADW;
        C_LOADW: if (!dsp_loading) begin
          st <= C_RUN; support_valid <= 1'b1; ctf_runs <= ctf_runs + 1'b1;
        end
        C_RUN: begin
          if (!enable) st <= C_OFF;
          else if (ctf_request || det_trigger || pending) begin
            pending <= 1'b0; st <= C_FRAME; fb_start <= 1'b1;
          end
        end
        default: st <= C_OFF;
      endcase
    end
  end

  always_comb
    for (int k = 0; k < K_MAX; k++)
      carrier_idx[k] = carrier_override[k] ? LW'(LC) : z_idx[k];

endmodule
