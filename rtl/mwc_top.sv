// mwc_top: digital part of the modulated wideband converter (MWC).
//
// The MWC samples a sparse multiband signal below its Nyquist rate: each of
// m analog channels multiplies the input by a periodic +-1 waveform p_i(t),
// lowpass filters the product and samples it at fs. The mixers, filters,
// ADCs and the analog reconstruction back-end are analog parts and stay
// outside this module; their digital signals are its ports:
//  - p_out: the m sign waveforms for the mixers, from one circular shift
//    register per channel (sign_waveform_gen), in the chip-rate clock domain
//    clk_chip (M/Tp, 10 GHz in the paper's example);
//  - y_in/y_valid: one m-sample vector per sampling instant from the ADCs;
//  - z_*, carrier_idx: the low-rate sequence of every active spectrum slice
//    and the slice (carrier) the back-end must shift it to.
//
// Recovery chain, in clock domain clk (must be much faster than fs, see
// README): the sample memory delays the sample stream by N_MEM vectors on its
// way to the DSP; the CTF (frame builder + solver) finds the support S from
// N_CTF live vectors; the DSP computes z_S[n] = A_S^+ y[n] and z of one
// watched slice outside S; the support change detector watches that slice;
// the controller sequences CTF runs (at start-up, on detector trigger, on
// application request) and applies band selection (slice_en) and carrier
// override.
//
// The host writes the sensing matrix A (calibrated coefficients c_il) through
// a_*, and the sign patterns through sg_*, before setting enable.
// Counters: ctf_runs (finished CTF runs), dsp_drops (delayed vectors the DSP
// could not take because it was busy copying factors).
module mwc_top
  import mwc_pkg::cplx_a_t, mwc_pkg::cplx_r_t, mwc_pkg::cplx_z_t, mwc_pkg::ZW;
#(
  parameter int unsigned M_CH    = mwc_pkg::M_CH,
  parameter int unsigned M_LEN   = mwc_pkg::M_LEN,
  parameter int unsigned L       = mwc_pkg::L_SLICE,
  parameter int unsigned N_BANDS = mwc_pkg::N_BANDS,
  parameter int unsigned N_CTF   = mwc_pkg::N_CTF,
  parameter int unsigned N_MEM   = mwc_pkg::N_MEM,
  parameter int unsigned SW      = mwc_pkg::SW,
  parameter int unsigned SHARE_R = M_CH,
  localparam int unsigned K_MAX = 2*N_BANDS + 1,
  localparam int unsigned CW  = (M_CH > 1) ? $clog2(M_CH) : 1,
  localparam int unsigned LW  = $clog2(L + 1),
  localparam int unsigned KW  = $clog2(K_MAX + 1),
  localparam int unsigned PW  = (M_LEN > 1) ? $clog2(M_LEN) : 1,
  localparam int unsigned QW  = 2*SW + $clog2(N_CTF) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // sign waveform generators (chip-rate clock domain)
  input  logic                     clk_chip,
  input  logic                     sg_load,
  input  logic [CW-1:0]            sg_load_ch,
  input  logic [M_LEN-1:0]         sg_load_pattern,
  input  logic                     sg_run,
  output logic [M_CH-1:0]          p_out,
  output logic [PW-1:0]            sg_phase,
  output logic                     sg_period_start,
  // host configuration
  input  logic                     a_we,
  input  logic [CW-1:0]            a_row,
  input  logic [LW-1:0]            a_col,
  input  cplx_a_t                  a_wdata,
  input  logic                     enable,
  input  logic                     ctf_request,
  input  logic [2*ZW:0]            det_thresh,
  input  logic [L-1:0]             slice_en,
  input  logic [K_MAX-1:0]         carrier_override,
  // samples from the ADCs
  input  logic                     y_valid,
  input  logic [M_CH-1:0][SW-1:0]  y_in,
  // recovered slice sequences
  output logic                     z_valid,
  output logic [KW-1:0]            z_cnt,
  output logic [LW-1:0]            z_idx [K_MAX],
  output cplx_z_t                  z_val [K_MAX],
  output logic [K_MAX-1:0]         z_act,
  output logic [LW-1:0]            carrier_idx [K_MAX],
  output logic [L-1:0]             supp_mask,
  output logic                     support_valid,
  output logic                     ctf_busy,
  output logic [15:0]              ctf_runs,
  output logic [15:0]              det_triggers,
  output logic [15:0]              dsp_drops
);

  // ---- sign waveforms ----
  sign_waveform_gen #(.M_CH(M_CH), .M_LEN(M_LEN), .SHARE_R(SHARE_R)) u_sign (
    .clk(clk_chip), .rst_n, .load(sg_load), .load_ch(sg_load_ch),
    .load_pattern(sg_load_pattern), .run(sg_run), .p(p_out),
    .phase(sg_phase), .period_start(sg_period_start));

  // ---- sample memory ----
  logic mem_valid;
  logic [M_CH-1:0][SW-1:0] mem_vec;
  logic [$clog2(N_MEM > 1 ? N_MEM : 2):0] mem_fill;
  sample_memory #(.M_CH(M_CH), .N_MEM(N_MEM), .SW(SW)) u_mem (
    .clk, .rst_n, .flush(1'b0), .in_valid(y_valid), .in_vec(y_in),
    .out_valid(mem_valid), .out_vec(mem_vec), .fill(mem_fill));

  // ---- controller signals ----
  logic fb_start, fb_done, fb_take, fb_ready, fb_busy;
  logic solver_start, solver_done, solver_busy;
  logic dsp_load, dsp_loading, dsp_ready;
  logic det_enable, det_trigger;

  // ---- CTF: frame builder ----
  logic [CW-1:0] q_row, q_col;
  logic signed [QW-1:0] q_data;
  ctf_frame_builder #(.M_CH(M_CH), .N_CTF(N_CTF), .SW(SW), .QW(QW)) u_frame (
    .clk, .rst_n, .start(fb_start), .in_valid(y_valid && fb_take), .in_ready(fb_ready),
    .in_vec(y_in), .busy(fb_busy), .done(fb_done),
    .rd_row(q_row), .rd_col(q_col), .rd_data(q_data));

  // ---- CTF: MMV solver ----
  logic [KW-1:0] s_cnt;
  logic [LW-1:0] s_idx [K_MAX];
  logic [KW-1:0] f_k, f_j;
  logic [CW-1:0] f_i;
  cplx_r_t f_basis;
  logic signed [47:0] f_r_re, f_r_im;
  logic [79:0] f_invnb;
  ctf_mmv_solver #(.M_CH(M_CH), .L(L), .N_BANDS(N_BANDS), .QW(QW)) u_solver (
    .clk, .rst_n, .a_we, .a_row, .a_col, .a_wdata,
    .start(solver_start), .busy(solver_busy), .done(solver_done),
    .q_row, .q_col, .q_data,
    .supp_mask, .supp_cnt(s_cnt), .supp_idx(s_idx),
    .f_k, .f_j, .f_i, .f_basis, .f_r_re, .f_r_im, .f_invnb);

  // ---- DSP ----
  logic [LW-1:0] watch_idx;
  cplx_z_t z_watch;
  dsp_recovery #(.M_CH(M_CH), .L(L), .N_BANDS(N_BANDS), .SW(SW)) u_dsp (
    .clk, .rst_n, .load(dsp_load), .loading(dsp_loading), .s_cnt, .s_idx,
    .f_k, .f_j, .f_i, .f_basis, .f_r_re, .f_r_im, .f_invnb,
    .slice_en, .in_valid(mem_valid && support_valid), .in_ready(dsp_ready), .in_vec(mem_vec),
    .out_valid(z_valid), .z_cnt, .z_idx, .z_val, .z_act, .watch_idx, .z_watch);

  // ---- support change detector ----
  logic [2:0] det_run;
  support_change_detector u_det (
    .clk, .rst_n, .enable(det_enable), .z_valid(z_valid), .z_watch,
    .thresh(det_thresh), .trigger(det_trigger), .run_len(det_run));

  // ---- controller ----
  mwc_controller #(.L(L), .K_MAX(K_MAX)) u_ctrl (
    .clk, .rst_n, .enable, .ctf_request, .det_trigger,
    .fb_start, .fb_done, .solver_start, .solver_done, .dsp_load, .dsp_loading,
    .fb_take, .det_enable, .support_valid, .ctf_busy, .ctf_runs,
    .z_idx, .carrier_override, .carrier_idx);

  // ---- event counters ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dsp_drops <= '0; det_triggers <= '0;
    end else begin
      if (mem_valid && support_valid && !dsp_ready) dsp_drops <= dsp_drops + 1'b1;
      if (det_trigger) det_triggers <= det_triggers + 1'b1;
    end
  end

endmodule
