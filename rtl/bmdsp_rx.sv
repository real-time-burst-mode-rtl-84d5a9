// Burst-mode receiver DSP for 25 Gbit/s OOK (the paper's receive flow).
//
// The ADC delivers 128 samples per valid cycle at 1.125 samples/symbol. A FIFO
// re-packs them into 108-sample beats (96 symbols). Two paths follow:
// * Acquisition path: add 36-sample overlap (144) -> 144-point FFT -> RRC ->
//   frame detection on the Preamble-A tone and the feed-forward SPO estimate
//   -> BM-FDTR (initialised with that estimate) -> drop the roll-off bins
//   (keep bins 0..63 and 80..143) -> 128-point IFFT -> drop the 32-symbol
//   overlap -> frame synchronisation on Preamble B at 1 sample/symbol.
// * Data path: the 108-sample beats wait in the frame-adjust memory; once
//   the frame position is known they are re-cut to start at Preamble B, then
//   add overlap -> 144-point FFT -> RRC -> FDTR -> drop roll-off bins ->
//   BM-FDE (MMSE taps from Preamble C, then DD-LMS) with its 128-point IFFT
//   -> PAM2 demapper (96 bits per beat).
// The acquisition latency from a FIFO beat to the synchronisation result is
// SYNC_LAT = 168 cycles; the beat index is delayed by the same amount so the
// frame-adjust memory knows which stored beats the result refers to.
// `clear` ends a burst (the upstream scheduler knows the burst boundaries;
// the paper does not describe how a burst ends) and re-arms detection.
// The paper draws the acquisition path's FFT, RRC, FDTR and IFFT dashed next
// to the data path's; this design builds them as separate instances. The
// data path's FDTR is initialised with the same Preamble-A estimate when the
// frame position is found.
module bmdsp_rx
  import bmdsp_pkg::*;
#(
  parameter longint PMIN        = 64'd4000000,
  parameter int     SYNC_THRESH = 2000,
  parameter int     ADJ_DEPTH   = 256
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 clear,
  input  logic                 adc_valid,
  input  logic signed [DW-1:0] adc [ADC_LANES],
  output logic                 bits_valid,
  output logic [SYM_PER_BEAT-1:0] bits,
  // status
  output logic                 fifo_overflow,
  output logic                 detected,       // pulse: burst detected, tau0 taken
  output logic signed [15:0]   tau0,
  output logic                 sync_found,     // pulse: frame position found
  output logic [7:0]           sync_pos,
  output logic                 w_loaded,       // pulse: MMSE taps loaded
  output logic                 lms_update,     // pulse: DD-LMS update
  output logic [39:0]          lms_err_pwr,
  output logic signed [19:0]   tau_acq,        // timing of the acquisition FDTR
  output logic signed [19:0]   tau_data        // timing of the data-path FDTR
);
  localparam int AAW = $clog2(ADJ_DEPTH);
  localparam int SYNC_LAT = LAT_OVL + LAT_FFT144 + LAT_RRC + LAT_FDTR + LAT_FFT128 + LAT_SYNC;

  // ---------------- FIFO 128 -> 108
  logic signed [DW-1:0] b108 [LANES_RS];
  logic b_v;
  gearbox #(.W(DW), .IN_W(ADC_LANES), .OUT_W(LANES_RS)) u_fifo (
    .clk(clk), .rst(rst), .in_valid(adc_valid), .din(adc),
    .out_valid(b_v), .dout(b108), .overflow(fifo_overflow));

  // ================= acquisition path
  logic signed [DW-1:0] a144 [LANES_FFT];
  logic a_v;
  overlap_add #(.W(DW), .IN_W(LANES_RS), .OV(OV_RS)) u_ov_a (
    .clk(clk), .rst(rst), .in_valid(b_v), .din(b108), .out_valid(a_v), .dout(a144));

  cplx_t af_in [LANES_FFT], af [LANES_FFT], ar [LANES_FFT], at [LANES_FFT];
  logic  af_v, ar_v, at_v;
  always_comb for (int i = 0; i < LANES_FFT; i++) begin
    af_in[i].re = a144[i];
    af_in[i].im = '0;
  end
  fft_core #(.N2(4), .N3(2), .INVERSE(1'b0)) u_fft_a (
    .clk(clk), .in_valid(a_v), .x(af_in), .out_valid(af_v), .y(af));
  rrc_filter #(.N(LANES_FFT)) u_rrc_a (
    .clk(clk), .rst(rst), .in_valid(af_v), .x(af), .out_valid(ar_v), .y(ar));

  logic det, det_v;
  logic [7:0] det_bin;
  logic [32:0] det_pwr;
  frame_detect #(.N(LANES_FFT), .PMIN(PMIN)) u_det (
    .clk(clk), .rst(rst), .in_valid(ar_v), .x(ar),
    .out_valid(det_v), .detect(det), .peak_bin(det_bin), .peak_pwr(det_pwr));

  logic spo_locked;
  spo_init #(.N(LANES_FFT)) u_spo (
    .clk(clk), .rst(rst), .clear(clear), .x(ar), .detect(det && det_v),
    .tau0_valid(detected), .tau0(tau0), .locked(spo_locked));

  logic signed [31:0] ted_a;
  logic ted_av;
  bm_fdtr #(.N(LANES_FFT)) u_fdtr_a (
    .clk(clk), .rst(rst), .tau0_load(detected), .tau0(tau0),
    .in_valid(ar_v), .x(ar), .out_valid(at_v), .y(at),
    .tau(tau_acq), .ted_err(ted_a), .ted_valid(ted_av));

  // drop roll-off bins, 128-point IFFT, drop overlap
  cplx_t a128 [LANES_1SPS], a_t [LANES_1SPS];
  logic  a_tv;
  always_comb for (int k = 0; k < LANES_1SPS; k++)
    a128[k] = (k < LANES_1SPS / 2) ? at[k] : at[k + (LANES_FFT - LANES_1SPS)];
  fft_core #(.N2(7), .N3(0), .INVERSE(1'b1)) u_ifft_a (
    .clk(clk), .in_valid(at_v), .x(a128), .out_valid(a_tv), .y(a_t));

  logic signed [15:0] s96 [SYM_PER_BEAT];
  always_comb for (int i = 0; i < SYM_PER_BEAT; i++) s96[i] = a_t[OV_SYM + i].re;

  logic [7:0] sync_p1;
  logic signed [23:0] sync_peak;
  logic sync_v;
  frame_sync #(.THRESH(SYNC_THRESH)) u_sync (
    .clk(clk), .rst(rst), .clear(clear), .arm(detected), .in_valid(a_tv), .x(s96),
    .found(sync_found), .p1(sync_p1), .pos(sync_pos), .peak(sync_peak), .out_valid(sync_v));

  // ================= data path
  logic [AAW-1:0] beat_idx, sync_beat;
  delay_line #(.W(AAW), .LAT(SYNC_LAT)) u_bidx (.clk(clk), .d(beat_idx), .q(sync_beat));

  logic signed [DW-1:0] d108 [LANES_RS];
  logic d_v, adj_active;
  frame_adjust #(.W(DW), .NL(LANES_RS), .DEPTH(ADJ_DEPTH)) u_adj (
    .clk(clk), .rst(rst), .clear(clear), .in_valid(b_v), .din(b108), .beat_idx(beat_idx),
    .sync_found(sync_found), .sync_beat(sync_beat), .sync_pos(sync_pos),
    .active(adj_active), .out_valid(d_v), .dout(d108));

  logic signed [DW-1:0] d144 [LANES_FFT];
  logic d144_v;
  overlap_add #(.W(DW), .IN_W(LANES_RS), .OV(OV_RS)) u_ov_d (
    .clk(clk), .rst(rst), .in_valid(d_v), .din(d108), .out_valid(d144_v), .dout(d144));

  cplx_t df_in [LANES_FFT], df [LANES_FFT], dr [LANES_FFT], dt [LANES_FFT];
  logic  df_v, dr_v, dt_v;
  always_comb for (int i = 0; i < LANES_FFT; i++) begin
    df_in[i].re = d144[i];
    df_in[i].im = '0;
  end
  fft_core #(.N2(4), .N3(2), .INVERSE(1'b0)) u_fft_d (
    .clk(clk), .in_valid(d144_v), .x(df_in), .out_valid(df_v), .y(df));
  rrc_filter #(.N(LANES_FFT)) u_rrc_d (
    .clk(clk), .rst(rst), .in_valid(df_v), .x(df), .out_valid(dr_v), .y(dr));

  logic signed [31:0] ted_d;
  logic ted_dv;
  bm_fdtr #(.N(LANES_FFT)) u_fdtr_d (
    .clk(clk), .rst(rst), .tau0_load(sync_found), .tau0(tau0),
    .in_valid(dr_v), .x(dr), .out_valid(dt_v), .y(dt),
    .tau(tau_data), .ted_err(ted_d), .ted_valid(ted_dv));

  cplx_t d128 [LANES_1SPS], z_t [LANES_1SPS];
  logic  z_v;
  always_comb for (int k = 0; k < LANES_1SPS; k++)
    d128[k] = (k < LANES_1SPS / 2) ? dt[k] : dt[k + (LANES_FFT - LANES_1SPS)];

  logic signed [23:0] w0;
  bm_fde u_fde (
    .clk(clk), .rst(rst), .clear(clear || sync_found), .in_valid(dt_v), .y(d128),
    .out_valid(z_v), .zt(z_t), .w_loaded(w_loaded), .lms_update(lms_update),
    .lms_err_pwr(lms_err_pwr), .w0_re(w0));

  pam2_demap #(.NL(LANES_1SPS), .OV(OV_SYM)) u_demap (
    .clk(clk), .rst(rst), .in_valid(z_v), .z(z_t), .out_valid(bits_valid), .bits(bits));
endmodule
