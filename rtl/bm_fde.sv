// Burst-mode frequency-domain equaliser (BM-FDE) with the final IFFT.
//
// Input: frame-aligned beats of NB = 128 bins after timing recovery; the
// first beat after `clear` is Preamble B, the next CB = 8 beats are
// Preamble C, the rest is payload.
// MMSE initialisation (paper Eq. 7): for the 8 Preamble-C beats the block
// accumulates C*conj(Y) and Y*conj(Y) per bin, where C is the known
// transmitted Preamble-C spectrum (a constant table, see below). The means
// are the sums shifted right by 3 (the paper's text says "left"; a mean over
// 8 beats is a right shift) and W = E[C Y*] / E[Y Y*] is formed per bin by
// 59-cycle dividers. Because Y Y* is real, the complex division reduces to
// two real ones. After 3 + 2 + 17 + 59 + 2 cycles (as in the paper's figure)
// "W select" loads W into the tap registers, and the payload path, delayed by
// MAIN_DLY = 83 cycles, is multiplied bin by bin by W (1 cycle) and
// transformed by a 128-point IFFT (46 cycles). Only payload beats are
// passed on (out_valid).
// DD-LMS tracking (paper Eq. 8, simplified interpolation FFT): of each
// equalised time-domain beat, 8 samples at indices 16*i are sliced to
// +-CREF; an 8-point FFT of the decisions (scaled by 16 to the 128-point
// scale) gives Zhat, which is subtracted from the 8 equalised bins Z(16*i);
// each of the 8 errors is repeated 16 times and every tap is updated as
//   W(k) <- W(k) - 2^-MU_SHIFT * e(k) * conj(Y(k)).
// The paper writes "+2 mu Y e" with e = Z - Zhat; this design uses the
// gradient-descent sign and conj(Y), which is what makes the loop converge.
// The bin Z is delayed 84 cycles to meet Zhat (the paper prints 70 for its
// own FFT latencies) and the update reaches the taps about 88 cycles after
// the beat that caused it (the paper: 80).
// The Preamble-C table is DFT128 of the overlapped +-1 symbol windows
// (32 symbols of history + 96 of the beat), scaled by CREF, computed at
// elaboration from the same sequence generator as the transmitter.
module bm_fde
  import bmdsp_pkg::*;
#(
  parameter int NB       = 128,
  parameter int CB       = 8,
  parameter int CREF     = 64,
  parameter int WW       = 24,
  parameter int MU_SHIFT = 14,
  parameter int DIV_LAT  = 59,
  parameter int MAIN_DLY = 83
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clear,
  input  logic               in_valid,
  input  cplx_t              y [NB],
  output logic               out_valid,
  output cplx_t              zt [NB],
  output logic               w_loaded,     // pulse: MMSE taps taken
  output logic               lms_update,   // pulse: one DD-LMS update applied
  output logic [39:0]        lms_err_pwr,  // sum |e|^2 of the last update
  output logic signed [WW-1:0] w0_re      // tap of bin 1, for observation
);
  localparam int ND   = 8;            // decision points per beat
  localparam int DSTP = NB / ND;      // 16
  localparam int AW_  = 40;

  // ---------------- Preamble-C reference spectrum
  typedef logic [2*DW-1:0] cref_t [CB * NB];
  function automatic cref_t mk_cref();
    cref_t t;
    real cs [NB], sn [NB];
    int  s [NB];
    for (int i = 0; i < NB; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979323846 * i / NB);
      sn[i] = $sin(2.0 * 3.14159265358979323846 * i / NB);
    end
    for (int b = 0; b < CB; b++) begin
      for (int n = 0; n < NB; n++)
        s[n] = pre_sym(PRE_A_LEN + PRE_B_LEN + b * SYM_PER_BEAT - (NB - SYM_PER_BEAT) + n);
      for (int k = 0; k < NB; k++) begin
        real ar, ai;
        cplx_t c;
        ar = 0.0; ai = 0.0;
        for (int n = 0; n < NB; n++) begin
          ar += s[n] * cs[(k * n) % NB];
          ai -= s[n] * sn[(k * n) % NB];
        end
        c.re = sat(48'($rtoi($floor(ar * CREF + 0.5))));
        c.im = sat(48'($rtoi($floor(ai * CREF + 0.5))));
        t[b * NB + k] = c;
      end
    end
    return t;
  endfunction
  localparam cref_t CTAB = mk_cref();

  // ---------------- beat counting
  logic [15:0] bc;
  logic        is_c, is_pay;
  always_ff @(posedge clk) begin
    if (rst || clear)  bc <= '0;
    else if (in_valid && bc != 16'hffff) bc <= bc + 16'd1;
  end
  assign is_c   = in_valid && bc >= 16'd1 && bc <= 16'(CB);
  assign is_pay = in_valid && bc >  16'(CB);

  // ---------------- MMSE: 3-delay, products, 2-delay, accumulate
  cplx_t y3 [3][NB];
  logic  c3 [3];
  logic [3:0] ci3 [3];
  always_ff @(posedge clk) begin
    y3[0] <= y; y3[1] <= y3[0]; y3[2] <= y3[1];
    c3[0] <= (rst || clear) ? 1'b0 : is_c; c3[1] <= c3[0]; c3[2] <= c3[1];
    ci3[0] <= 4'(bc - 16'd1); ci3[1] <= ci3[0]; ci3[2] <= ci3[1];
  end

  logic signed [2*DW:0] pcy_re [NB], pcy_im [NB];
  logic        [2*DW:0] pyy [NB];
  logic pv, pv2;
  always_ff @(posedge clk) begin
    for (int k = 0; k < NB; k++) begin
      cplx_t c, v;
      c = cplx_t'(CTAB[int'(ci3[2]) * NB + k]);
      v = y3[2][k];
      // C * conj(Y)
      pcy_re[k] <= (2*DW+1)'(c.re * v.re) + (2*DW+1)'(c.im * v.im);
      pcy_im[k] <= (2*DW+1)'(c.im * v.re) - (2*DW+1)'(c.re * v.im);
      pyy[k]    <= (2*DW+1)'(v.re * v.re) + (2*DW+1)'(v.im * v.im);
    end
    pv  <= c3[2] && !clear && !rst;
    pv2 <= pv && !clear && !rst;
  end
  logic signed [2*DW:0] pcy_re2 [NB], pcy_im2 [NB];
  logic        [2*DW:0] pyy2 [NB];
  always_ff @(posedge clk) begin
    pcy_re2 <= pcy_re; pcy_im2 <= pcy_im; pyy2 <= pyy;
  end

  logic signed [AW_-1:0] acc_re [NB], acc_im [NB], acc_yy [NB];
  logic [3:0] nacc;
  logic       acc_done;
  always_ff @(posedge clk) begin
    acc_done <= 1'b0;
    if (rst || clear) begin
      nacc <= '0;
      for (int k = 0; k < NB; k++) begin
        acc_re[k] <= '0; acc_im[k] <= '0; acc_yy[k] <= '0;
      end
    end else if (pv2) begin
      for (int k = 0; k < NB; k++) begin
        acc_re[k] <= acc_re[k] + AW_'(pcy_re2[k]);
        acc_im[k] <= acc_im[k] + AW_'(pcy_im2[k]);
        acc_yy[k] <= acc_yy[k] + AW_'({1'b0, pyy2[k]});
      end
      nacc <= nacc + 4'd1;
      if (int'(nacc) == CB - 1) acc_done <= 1'b1;
    end
  end

  // E[.] = sum >> 3, then W = E[CY*] / E[YY*] (Q14)
  logic signed [WW-1:0] wm_re [NB], wm_im [NB];
  for (genvar k = 0; k < NB; k++) begin : g_div
    pipe_div #(.NW(AW_), .DVW(AW_), .QW(WW), .FRAC(CFRAC), .LAT(DIV_LAT)) u_dre (
      .clk(clk), .num(acc_re[k] >>> 3), .den(acc_yy[k] >>> 3), .q(wm_re[k]));
    pipe_div #(.NW(AW_), .DVW(AW_), .QW(WW), .FRAC(CFRAC), .LAT(DIV_LAT)) u_dim (
      .clk(clk), .num(acc_im[k] >>> 3), .den(acc_yy[k] >>> 3), .q(wm_im[k]));
  end

  logic w_sel;
  delay_line #(.W(1), .LAT(17 + DIV_LAT + 1)) u_wsel (.clk(clk), .d(acc_done), .q(w_sel));

  // ---------------- main path: 83-delay, FDE multiply, IFFT
  cplx_t ym [NB];
  logic  vm;
  cplx_t ydl [MAIN_DLY][NB];
  logic  vdl [MAIN_DLY];
  always_ff @(posedge clk) begin
    ydl[0] <= y;
    vdl[0] <= (rst || clear) ? 1'b0 : is_pay;
    for (int i = 1; i < MAIN_DLY; i++) begin
      ydl[i] <= ydl[i-1];
      vdl[i] <= (rst || clear) ? 1'b0 : vdl[i-1];
    end
  end
  assign ym = ydl[MAIN_DLY-1];
  assign vm = vdl[MAIN_DLY-1];

  logic signed [WW-1:0] w_re [NB], w_im [NB];
  logic                 w_ready;
  cplx_t zf [NB];
  logic  zv;

  always_ff @(posedge clk) begin
    for (int k = 0; k < NB; k++) begin
      logic signed [DW+WW:0] pr, pi;
      pr = (DW+WW+1)'(ym[k].re * w_re[k]) - (DW+WW+1)'(ym[k].im * w_im[k]);
      pi = (DW+WW+1)'(ym[k].re * w_im[k]) + (DW+WW+1)'(ym[k].im * w_re[k]);
      zf[k].re <= sat(48'(pr >>> CFRAC));
      zf[k].im <= sat(48'(pi >>> CFRAC));
    end
    zv <= (rst || clear) ? 1'b0 : (vm && w_ready);
  end

  fft_core #(.N2(7), .N3(0), .INVERSE(1'b1)) u_ifft (
    .clk(clk), .in_valid(zv), .x(zf), .out_valid(out_valid), .y(zt));

  // ---------------- DD-LMS: decision, 8-point FFT, error, interpolation, update
  localparam int ZDLY = LAT_FFT128 + 3 + 17 + LAT_FFT8;   // 84

  cplx_t dec [ND], dec_d [ND], zhat [ND];
  logic  dv, dv_d, zh_v;
  cplx_t zt3 [NB];
  logic  zt3_v;
  cplx_t zt_p [3][NB];
  logic  zt_pv [3];
  always_ff @(posedge clk) begin
    zt_p[0] <= zt; zt_p[1] <= zt_p[0]; zt_p[2] <= zt_p[1];
    zt_pv[0] <= (rst || clear) ? 1'b0 : out_valid;
    zt_pv[1] <= (rst || clear) ? 1'b0 : zt_pv[0];
    zt_pv[2] <= (rst || clear) ? 1'b0 : zt_pv[1];
  end
  assign zt3   = zt_p[2];
  assign zt3_v = zt_pv[2];

  always_comb begin
    for (int i = 0; i < ND; i++) begin
      dec[i].re = (zt3[i * DSTP].re > 0) ? DW'(CREF) : -DW'(CREF);
      dec[i].im = '0;
    end
    dv = zt3_v;
  end

  cplx_t dec_p [17][ND];
  logic  dec_pv [17];
  always_ff @(posedge clk) begin
    dec_p[0] <= dec;
    dec_pv[0] <= (rst || clear) ? 1'b0 : dv;
    for (int i = 1; i < 17; i++) begin
      dec_p[i] <= dec_p[i-1];
      dec_pv[i] <= (rst || clear) ? 1'b0 : dec_pv[i-1];
    end
  end
  assign dec_d = dec_p[16];
  assign dv_d  = dec_pv[16];

  fft_core #(.N2(3), .N3(0), .INVERSE(1'b0), .SHIFT2(0)) u_fft8 (
    .clk(clk), .in_valid(dv_d), .x(dec_d), .out_valid(zh_v), .y(zhat));

  // Z(16 i) delayed to meet Zhat; Y delayed to meet the update
  cplx_t zsel_p [ZDLY][ND];
  cplx_t y_upd [ZDLY + 3][NB];
  always_ff @(posedge clk) begin
    for (int i = 0; i < ND; i++) zsel_p[0][i] <= zf[i * DSTP];
    for (int s = 1; s < ZDLY; s++) zsel_p[s] <= zsel_p[s-1];
    y_upd[0] <= ym;
    for (int s = 1; s < ZDLY + 3; s++) y_upd[s] <= y_upd[s-1];
  end

  logic signed [DW+5:0] e_re [ND], e_im [ND];
  logic ev, ev2;
  logic signed [DW+5:0] ei_re [NB], ei_im [NB];
  always_ff @(posedge clk) begin
    logic [39:0] pw;
    pw = '0;
    for (int i = 0; i < ND; i++) begin
      e_re[i] <= (DW+6)'(zsel_p[ZDLY-1][i].re) - ((DW+6)'(zhat[i].re) <<< 4);
      e_im[i] <= (DW+6)'(zsel_p[ZDLY-1][i].im) - ((DW+6)'(zhat[i].im) <<< 4);
    end
    ev <= (rst || clear) ? 1'b0 : zh_v;
    // interpolation: repeat each error DSTP times
    for (int k = 0; k < NB; k++) begin
      ei_re[k] <= e_re[k / DSTP];
      ei_im[k] <= e_im[k / DSTP];
    end
    for (int i = 0; i < ND; i++)
      pw += 40'(e_re[i] * e_re[i]) + 40'(e_im[i] * e_im[i]);
    if (ev) lms_err_pwr <= pw;
    ev2 <= (rst || clear) ? 1'b0 : ev;
  end

  // ---------------- tap registers: W select, then DD-LMS updates
  always_ff @(posedge clk) begin
    w_loaded   <= 1'b0;
    lms_update <= 1'b0;
    if (rst || clear) begin
      w_ready <= 1'b0;
      for (int k = 0; k < NB; k++) begin
        w_re[k] <= WW'(CONE); w_im[k] <= '0;
      end
    end else if (w_sel) begin
      w_ready  <= 1'b1;
      w_loaded <= 1'b1;
      for (int k = 0; k < NB; k++) begin
        w_re[k] <= wm_re[k]; w_im[k] <= wm_im[k];
      end
    end else if (ev2 && w_ready) begin
      lms_update <= 1'b1;
      for (int k = 0; k < NB; k++) begin
        logic signed [2*DW+7:0] ur, ui;
        cplx_t v;
        v  = y_upd[ZDLY + 2][k];
        // e * conj(Y)
        ur = (2*DW+8)'(ei_re[k] * v.re) + (2*DW+8)'(ei_im[k] * v.im);
        ui = (2*DW+8)'(ei_im[k] * v.re) - (2*DW+8)'(ei_re[k] * v.im);
        w_re[k] <= w_re[k] - WW'(ur >>> MU_SHIFT);
        w_im[k] <= w_im[k] - WW'(ui >>> MU_SHIFT);
      end
    end
  end
  assign w0_re = w_re[1];
endmodule
