// Burst-mode frequency-domain timing recovery (BM-FDTR).
//
// Main path: each beat of N bins is multiplied bin by bin by exp(-j2*pi*f*tau)
// (the FD interpolator, f = signed bin frequency kk/N in cycles per sample),
// which delays the beat by tau samples. Latency LAT_FDTR = 4 cycles (3 before
// the multiplier, 1 after, as printed in the paper's figure).
// Feedback loop, once per valid beat, after the paper's Eqs. 2-6:
//   Godard detector  e(n) = sum_{k=KLO..KHI} Im[Y(k) conj(Y(k+PART))],
//                    PART = N - N/sps = 16, k = ceil((1-a)K)..floor((1+a)K-1)
//                    = 58..69 for K = 64, a = 0.1; scaled by 2^-ESHIFT.
//   loop filter      W(n) = kp*e(n) + ki*sum_{l<=n} e(l)   (Q16, KP/KI are Q16)
//   NCO              d = eta(n-1) - (1 + W(n)); eta(n) = d mod 1;
//                    m -> m-1 if d < -1, m if -1 <= d < 0, m+1 if d >= 0;
//                    mu = eta(n-1) / (1 + W(n)) by a 39-cycle divider.
//   LUT              tau = tau0 + m + mu -> exp(-j2*pi*f*tau) for every bin.
// The paper writes the NCO step as W(n) itself; with only the loop-filter
// output in it, d would be >= 0 on almost every beat and m would run away.
// This design therefore steps the NCO by 1 + W(n) (a nominal step of one
// NCO period plus the correction), which makes m + eta a continuous
// accumulation of -W. m is delayed by the divider latency so that m and mu
// of the same update are added. The phase LUT has 1024 entries (Q2.14);
// tau is signed Q8.12 samples. tau0 (from spo_init) is loaded by tau0_load,
// which also clears m, eta and the integrator: this is how the feed-forward
// estimate initialises the loop ("the judge allows the initial SPO to be fed
// into the feedback link"). KP, KI, ESHIFT are this design's values.
module bm_fdtr
  import bmdsp_pkg::*;
#(
  parameter int N       = 144,
  parameter int KLO     = 58,
  parameter int KHI     = 69,
  parameter int PART    = 16,
  parameter int ESHIFT  = 16,
  parameter int KP      = -2048,
  parameter int KI      = -64,
  parameter int DIV_LAT = 39,
  parameter int TW      = 20
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 tau0_load,
  input  logic signed [15:0]   tau0,        // Q4.12 samples
  input  logic                 in_valid,
  input  cplx_t                x [N],
  output logic                 out_valid,
  output cplx_t                y [N],
  output logic signed [TW-1:0] tau,         // Q8.12 samples, applied delay
  output logic signed [31:0]   ted_err,     // scaled Godard error of the last beat
  output logic                 ted_valid
);
  localparam int ONE = 1 << 16;
  localparam int LUTN = 1024;

  typedef logic [2*CW-1:0] lut_t [LUTN];
  function automatic lut_t mk_lut();
    lut_t t;
    for (int i = 0; i < LUTN; i++) t[i] = twiddle(i, LUTN, 1'b1);   // exp(+j2*pi*i/LUTN)
    return t;
  endfunction
  localparam lut_t LUT = mk_lut();

  // ---------------- main path: 3-delay, interpolator, 1-delay
  cplx_t x_p [3][N];
  logic  v_p [3];
  cplx_t x_d [N];
  logic  v_d;
  coef_t rot [N];

  always_ff @(posedge clk) begin
    x_p[0] <= x;
    x_p[1] <= x_p[0];
    x_p[2] <= x_p[1];
    v_p[0] <= rst ? 1'b0 : in_valid;
    v_p[1] <= rst ? 1'b0 : v_p[0];
    v_p[2] <= rst ? 1'b0 : v_p[1];
  end
  assign x_d = x_p[2];
  assign v_d = v_p[2];

  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) y[k] <= cmul(x_d[k], rot[k]);
    out_valid <= rst ? 1'b0 : v_d;
  end

  // ---------------- phase LUT: phase [turns] = -kk * tau / N, tau in Q12
  // kk * tau_q12 / (N * 4096) turns = kk * tau_q12 * (2^16 / (N * 4096)) in Q16
  localparam longint RECIP = (longint'(1) << 32) / (longint'(N) * 4096);   // Q16 of 2^16/(N*4096)
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) begin
      longint ph;
      logic [15:0] ph16;
      ph   = -((longint'((k < N / 2) ? k : (k - N)) * longint'(tau) * RECIP) >>> 16);
      ph16 = ph[15:0];
      rot[k] <= coef_t'(LUT[ph16[15:6]]);
    end
  end

  // ---------------- Godard detector: select, multiply, sum
  cplx_t ya [KHI-KLO+1], yb [KHI-KLO+1];
  logic  g_v1, g_v2;
  logic signed [47:0] esum;

  always_ff @(posedge clk) begin
    for (int i = 0; i <= KHI - KLO; i++) begin
      ya[i] <= y[KLO + i];
      yb[i] <= y[KLO + i + PART];
    end
    g_v1 <= rst ? 1'b0 : out_valid;
  end

  always_ff @(posedge clk) begin
    logic signed [47:0] acc;
    acc = '0;
    for (int i = 0; i <= KHI - KLO; i++)
      acc += 48'(ya[i].im * yb[i].re) - 48'(ya[i].re * yb[i].im);
    esum <= acc;
    g_v2 <= rst ? 1'b0 : g_v1;
  end

  logic signed [47:0] e_sh;
  logic signed [31:0] e_s;
  always_comb begin
    e_sh = esum >>> ESHIFT;
    if (e_sh > 48'sd2147483647)       e_s = 32'sh7fffffff;
    else if (e_sh < -48'sd2147483647) e_s = -32'sh7fffffff;
    else                              e_s = 32'(e_sh);
  end

  // ---------------- loop filter and NCO
  logic signed [47:0] integ, integ_n;
  logic signed [47:0] wq;             // loop-filter output, Q16
  logic signed [47:0] w_nco, dif;
  logic [15:0]        eta;
  logic signed [15:0] m_cnt;
  logic [15:0]        eta_div;
  logic signed [31:0] w_div;

  always_comb begin
    integ_n = integ + 48'(e_s);
    wq      = (48'(KP) * 48'(e_s) + 48'(KI) * integ_n) >>> 16;
    w_nco   = 48'(ONE) + wq;
    dif     = 48'(eta) - w_nco;
  end

  always_ff @(posedge clk) begin
    if (rst || tau0_load) begin
      integ     <= '0;
      eta       <= '0;
      m_cnt     <= '0;
      eta_div   <= '0;
      w_div     <= 32'(ONE);
      ted_valid <= 1'b0;
      ted_err   <= '0;
    end else begin
      ted_valid <= g_v2;
      if (g_v2) begin
        ted_err <= e_s;
        integ   <= integ_n;
        eta     <= dif[15:0];               // Mod(., 1)
        eta_div <= eta;                     // eta(n-1) for the divider
        w_div   <= 32'(w_nco);
        if (dif < -48'(ONE))  m_cnt <= m_cnt - 16'sd1;
        else if (dif >= 0)    m_cnt <= m_cnt + 16'sd1;
      end
    end
  end

  logic signed [23:0] mu_q;
  logic signed [15:0] m_d;
  pipe_div #(.NW(24), .DVW(32), .QW(24), .FRAC(16), .LAT(DIV_LAT)) u_div (
    .clk(clk), .num({8'd0, eta_div}), .den(w_div), .q(mu_q));
  delay_line #(.W(16), .LAT(DIV_LAT)) u_mdly (.clk(clk), .d(m_cnt), .q(m_d));

  logic signed [15:0] tau0_q;
  logic signed [23:0] mu_c;
  always_comb begin
    if (mu_q < 0)                mu_c = '0;
    else if (mu_q > 24'(ONE - 1)) mu_c = 24'(ONE - 1);
    else                         mu_c = mu_q;
  end

  always_ff @(posedge clk) begin
    if (rst)            tau0_q <= '0;
    else if (tau0_load) tau0_q <= tau0;
    tau <= TW'(tau0_q) + (TW'(m_d) <<< 12) + TW'(mu_c >>> 4);
  end
endmodule
