// Shared types, constants and constant functions of the burst-mode receiver DSP.
//
// Samples are complex fixed-point words of DW bits per component. Constant
// coefficients (FFT twiddles, RRC taps, phase LUT) are Q2.14 (1.0 = 16384).
// The beat geometry (96 symbols per beat, 32-symbol overlap, 1.125 samples per
// symbol, 108/144/128 lanes) and the preamble layout (A: 192, B: 96, C: 768
// symbols) follow the paper. The bit patterns of Pn and of Preamble C are not
// given there; this design draws them from two LFSRs (see pn_sym / prbs_c_sym).
// Latencies of the pipelined blocks are collected here so the top can align
// the side paths with the main path.
package bmdsp_pkg;

  localparam int DW    = 16;          // sample component width
  localparam int CW    = 16;          // coefficient width
  localparam int CFRAC = 14;          // coefficient fraction bits
  localparam int CONE  = 1 << CFRAC;  // 1.0 in coefficient format

  localparam int SYM_PER_BEAT = 96;   // symbols per beat at 1 sps
  localparam int OV_SYM       = 32;   // overlap at 1 sps
  localparam int LANES_1SPS   = 128;  // 96 + 32
  localparam int LANES_RS     = 108;  // 96 * 1.125
  localparam int OV_RS        = 36;   // 32 * 1.125
  localparam int LANES_FFT    = 144;  // 108 + 36
  localparam int ADC_LANES    = 128;

  localparam int PRE_A_LEN = 192;
  localparam int PRE_B_LEN = 96;
  localparam int PRE_C_LEN = 768;
  localparam int PN_LEN    = 32;
  localparam int PRE_BEATS = (PRE_A_LEN + PRE_B_LEN + PRE_C_LEN) / SYM_PER_BEAT; // 11
  localparam int C_BEATS   = PRE_C_LEN / SYM_PER_BEAT;                           // 8

  // Pipeline latencies in clock cycles (paper values where it gives them).
  localparam int LAT_FFT128 = 46;
  localparam int LAT_FFT144 = 53;
  localparam int LAT_FFT8   = 18;
  localparam int LAT_RRC    = 2;
  localparam int LAT_FDET   = 29;
  localparam int LAT_FDTR   = 4;    // interpolator: 3-delay in, 1-delay out (Fig. 2)
  localparam int LAT_SYNC   = 62;   // 18 + 6 + 37, plus the result register
  localparam int LAT_OVL    = 1;

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [CW-1:0] re;
    logic signed [CW-1:0] im;
  } coef_t;

  // pi appears as a literal inside the constant functions (no real-typed
  // parameters, so that every tool can elaborate the package)

  // exp(-j*2*pi*k/n) (forward) or exp(+j*2*pi*k/n) (inverse) in Q2.14.
  function automatic coef_t twiddle(int k, int n, bit inverse);
    real ang;
    coef_t w;
    ang = 2.0 * 3.14159265358979323846 * real'(k) / real'(n);
    w.re = CW'($rtoi($floor($cos(ang) * CONE + 0.5)));
    w.im = CW'($rtoi($floor((inverse ? 1.0 : -1.0) * $sin(ang) * CONE + 0.5)));
    return w;
  endfunction

  // Complex product with a Q2.14 coefficient, rounded.
  function automatic cplx_t cmul(cplx_t a, coef_t w);
    logic signed [DW+CW:0] pr, pi, rnd;
    cplx_t r;
    rnd = (DW+CW+1)'(1 << (CFRAC - 1));
    pr = a.re * w.re - a.im * w.im + rnd;
    pi = a.re * w.im + a.im * w.re + rnd;
    r.re = DW'(pr >>> CFRAC);
    r.im = DW'(pi >>> CFRAC);
    return r;
  endfunction

  // Saturate a wide signed value to DW bits.
  function automatic logic signed [DW-1:0] sat(logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sd32767;
    else if (v < -48'sd32768) return -16'sd32768;
    else                      return DW'(v);
  endfunction

  localparam int PRE_LEN = PRE_A_LEN + PRE_B_LEN + PRE_C_LEN;   // 1056

  // All preamble symbols as bits (1 = +1, 0 = -1), generated in one pass:
  //   A: repeated [0, 1];
  //   B: [Pn, Pn, -Pn], Pn = first 32 bits of PRBS7 (x^7 + x^6 + 1, seed 7'h7F);
  //   C: first 768 bits of PRBS15 (x^15 + x^14 + 1, seed 15'h0001).
  function automatic logic [PRE_LEN-1:0] mk_pre_bits();
    logic [PRE_LEN-1:0] r;
    logic [6:0]  s7;
    logic [14:0] s15;
    logic [PN_LEN-1:0] pn;
    logic b;
    s7 = 7'h7F;
    for (int i = 0; i < PN_LEN; i++) begin
      b = s7[6] ^ s7[5];
      s7 = {s7[5:0], b};
      pn[i] = b;
    end
    s15 = 15'h1;
    for (int n = 0; n < PRE_LEN; n++) begin
      if (n < PRE_A_LEN) r[n] = (n % 2 == 1);
      else if (n < PRE_A_LEN + PRE_B_LEN)
        r[n] = (n - PRE_A_LEN < 2 * PN_LEN) ? pn[(n - PRE_A_LEN) % PN_LEN]
                                            : !pn[(n - PRE_A_LEN) % PN_LEN];
      else begin
        b = s15[14] ^ s15[13];
        s15 = {s15[13:0], b};
        r[n] = b;
      end
    end
    return r;
  endfunction

  localparam logic [PRE_LEN-1:0] PRE_BITS = mk_pre_bits();

  // Pn symbol j as +1/-1
  function automatic int pn_sym(int j);
    return PRE_BITS[PRE_A_LEN + j] ? 1 : -1;
  endfunction

  // preamble symbol n (0..1055) as +1/-1
  function automatic int pre_sym(int n);
    return PRE_BITS[n] ? 1 : -1;
  endfunction

endpackage
